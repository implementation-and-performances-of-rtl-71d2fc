// i2c_eeprom_model: behavioural I2C EEPROM (256 bytes) for testbenches.
//
// The bus is modelled as two wired-AND lines: a line is low when the master
// (scl_oe / sda_oe) or this model pulls it. The model samples both lines on a
// fast clock and reacts to START, STOP, and SCL edges: it takes SDA on SCL
// rising, and changes its own SDA after SCL falls. It answers device address
// DEV; a write sets the memory pointer from the first byte and stores the
// following bytes; a read returns bytes from the pointer until the master
// NACKs. After each address or data byte it received it holds SCL low for
// STRETCH clocks (clock stretching). Counters of the bus events are public.
module i2c_eeprom_model #(
  parameter logic [6:0] DEV     = 7'h50,
  parameter int         STRETCH = 0
) (
  input  logic clk,
  input  logic scl_oe,
  input  logic sda_oe,
  output logic scl_i,
  output logic sda_i
);

  logic [7:0] mem [256];
  logic       s_sda = 1'b0, s_scl = 1'b0;   // 1 = model pulls the line low
  assign scl_i = !(scl_oe || s_scl);
  assign sda_i = !(sda_oe || s_sda);

  typedef enum {E_IDLE, E_DEV, E_ADDR, E_WR, E_RD} est_t;
  est_t       st = E_IDLE;
  logic       scl_p = 1'b1, sda_p = 1'b1, got = 1'b0, acked = 1'b0, m_nack = 1'b0;
  int         bitc = 0, hold = 0;
  logic [7:0] sh, ptr = '0;
  int         n_start = 0, n_stop = 0, n_wr = 0, n_rd = 0, n_stretch = 0, n_badaddr = 0;

  initial for (int i = 0; i < 256; i++) mem[i] = 8'(i * 7 + 1);

  always @(posedge clk) begin
    logic scl, sda;
    scl = scl_i; sda = sda_i;
    if (hold > 0) begin hold--; if (hold == 0) s_scl = 1'b0; end
    if (scl_p && scl && sda_p && !sda) begin            // START
      st = E_DEV; bitc = 0; got = 0; s_sda = 0; n_start++;
    end else if (scl_p && scl && !sda_p && sda) begin   // STOP
      st = E_IDLE; s_sda = 0; n_stop++;
    end else if (!scl_p && scl && st != E_IDLE) begin   // SCL rising: sample
      got = 1;
      if (bitc < 8) begin if (st != E_RD) sh = {sh[6:0], sda}; end
      else if (st == E_RD) m_nack = sda;
    end else if (scl_p && !scl && st != E_IDLE && got) begin  // SCL falling
      got = 0;
      if (bitc < 7) begin
        bitc++;
        if (st == E_RD) s_sda = !sh[7 - bitc];
      end else if (bitc == 7) begin
        bitc = 8;
        acked = 1'b1;
        unique case (st)
          E_DEV:  if (sh[7:1] != DEV) begin acked = 1'b0; n_badaddr++; end
          E_ADDR: ptr = sh;
          E_WR:   begin mem[ptr] = sh; ptr++; n_wr++; end
          default: acked = 1'b0;                           // E_RD: master acks
        endcase
        s_sda = acked;
        if (acked && STRETCH > 0) begin s_scl = 1'b1; hold = STRETCH; n_stretch++; end
      end else begin                                       // end of ack slot
        bitc = 0;
        s_sda = 1'b0;
        unique case (st)
          E_DEV:  st = !acked ? E_IDLE : (sh[0] ? E_RD : E_ADDR);
          E_ADDR: st = E_WR;
          E_WR:   st = E_WR;
          default: if (m_nack) st = E_IDLE;
        endcase
        if (st == E_RD) begin
          sh = mem[ptr]; ptr++; n_rd++;
          s_sda = !sh[7];
        end
      end
    end
    scl_p = scl; sda_p = sda;
  end

endmodule
