// i2c_ipbus: IPbus slave acting as I2C master, for the MAC-address EEPROM.
//
// The server performs I2C transfers byte by byte. One command may generate a
// (repeated) START condition, then write or read one byte, then a STOP
// condition. Writing the EEPROM's device address, memory address and data
// bytes, or reading them back, is a sequence of such commands.
//
// Registers (word offsets):
//   0  CMD     write: bit 0 START before the byte, bit 1 STOP after it,
//              bit 2 write the byte in bits 15:8, bit 3 read a byte,
//              bit 4 level sent in the acknowledge slot of a read
//              (0 = ACK, 1 = NACK for the last byte)
//   1  STATUS  read: bit 0 busy, bit 1 acknowledge bit received after the
//              last written byte (1 = NACK), bits 15:8 last byte read
// A command written while busy answers err and is ignored.
//
// Each bit takes four quarter periods of QUARTER IPbus clocks: SCL low and
// SDA set, SCL high, SDA sampled, SCL low again. SCL and SDA are open drain:
// *_oe = 1 pulls the line low, the inputs read the line. A slave may stretch
// the clock by holding SCL low; there is no multi-master arbitration.
// The paper only says that an I2C IPbus slave reads and writes the EEPROM
// holding the MAC address; the command set and timing are this design's.
module i2c_ipbus
  import gcu_pkg::*;
#(
  parameter int unsigned QUARTER = 78   // 31.25 MHz / (4 * 78) ~ 100 kHz SCL
) (
  input  logic      ipb_clk,
  input  logic      ipb_rst,
  input  ipb_wbus_t ipb_in,
  output ipb_rbus_t ipb_out,
  output logic      scl_oe,
  input  logic      scl_i,
  output logic      sda_oe,
  input  logic      sda_i
);

  typedef enum logic [1:0] {I_IDLE, I_START, I_BIT, I_STOP} istate_t;
  istate_t st;

  logic [1:0]  phase;
  logic [3:0]  bitn;        // 0..8, 8 = acknowledge slot
  logic [$clog2(QUARTER+1)-1:0] div;
  logic        do_stop, do_wr, do_rd, ack_lvl;
  logic [7:0]  txb, rxb;
  logic        rx_nack;
  logic        scl_rel, sda_rel;   // 1 = release (line high)
  logic        ack_q, err_q, new_tr;
  logic [31:0] rdata_q;
  logic        busy;

  assign busy   = (st != I_IDLE);
  assign new_tr = ipb_in.strobe && !ack_q && !err_q;
  assign scl_oe = !scl_rel;
  assign sda_oe = !sda_rel;

  always_ff @(posedge ipb_clk) begin
    if (ipb_rst) begin
      st       <= I_IDLE;
      phase    <= '0;
      bitn     <= '0;
      div      <= '0;
      do_stop  <= 1'b0;
      do_wr    <= 1'b0;
      do_rd    <= 1'b0;
      ack_lvl  <= 1'b0;
      txb      <= '0;
      rxb      <= '0;
      rx_nack  <= 1'b0;
      scl_rel  <= 1'b1;
      sda_rel  <= 1'b1;
      ack_q    <= 1'b0;
      err_q    <= 1'b0;
      rdata_q  <= '0;
    end else begin
      ack_q <= 1'b0;
      err_q <= 1'b0;

      // ---- bit engine, one step per quarter period ----
      // A slave holding SCL low after it was released stretches the clock.
      if (busy && !(scl_rel && !scl_i)) begin
        if (div != '0) div <= div - 1'b1;
        else begin
          div   <= ($clog2(QUARTER+1))'(QUARTER - 1);
          phase <= phase + 1'b1;
          unique case (st)
            I_START: unique case (phase)
              2'd0: begin scl_rel <= 1'b0; sda_rel <= 1'b1; end
              2'd1: scl_rel <= 1'b1;
              2'd2: sda_rel <= 1'b0;
              default: begin
                scl_rel <= 1'b0;
                bitn    <= '0;
                st      <= (do_wr || do_rd) ? I_BIT : (do_stop ? I_STOP : I_IDLE);
              end
            endcase
            I_BIT: unique case (phase)
              2'd0: begin
                scl_rel <= 1'b0;
                if (bitn == 4'd8) sda_rel <= do_wr ? 1'b1 : ack_lvl;
                else              sda_rel <= do_wr ? txb[3'd7 - bitn[2:0]] : 1'b1;
              end
              2'd1: scl_rel <= 1'b1;
              2'd2: begin
                if (bitn == 4'd8) begin
                  if (do_wr) rx_nack <= sda_i;
                end else if (do_rd) rxb <= {rxb[6:0], sda_i};
              end
              default: begin
                scl_rel <= 1'b0;
                if (bitn == 4'd8) st <= do_stop ? I_STOP : I_IDLE;
                else bitn <= bitn + 1'b1;
              end
            endcase
            I_STOP: unique case (phase)
              2'd0: begin scl_rel <= 1'b0; sda_rel <= 1'b0; end
              2'd1: scl_rel <= 1'b1;
              2'd2: sda_rel <= 1'b1;
              default: st <= I_IDLE;
            endcase
            default: st <= I_IDLE;
          endcase
        end
      end

      // ---- IPbus ----
      if (new_tr) begin
        ack_q <= 1'b1;
        if (ipb_in.addr[0] == 1'b0) begin
          if (ipb_in.write) begin
            if (busy) begin ack_q <= 1'b0; err_q <= 1'b1; end
            else begin
              do_stop  <= ipb_in.wdata[1];
              do_wr    <= ipb_in.wdata[2];
              do_rd    <= ipb_in.wdata[3] && !ipb_in.wdata[2];
              ack_lvl  <= ipb_in.wdata[4];
              txb      <= ipb_in.wdata[15:8];
              phase    <= '0;
              bitn     <= '0;
              div      <= ($clog2(QUARTER+1))'(QUARTER - 1);
              if (ipb_in.wdata[0])                        st <= I_START;
              else if (ipb_in.wdata[2] || ipb_in.wdata[3]) st <= I_BIT;
              else if (ipb_in.wdata[1])                   st <= I_STOP;
            end
          end else rdata_q <= {16'h0, rxb, 6'h0, rx_nack, busy};
        end else begin
          if (ipb_in.write) begin ack_q <= 1'b0; err_q <= 1'b1; end
          else rdata_q <= {16'h0, rxb, 6'h0, rx_nack, busy};
        end
      end
    end
  end

  assign ipb_out = '{rdata: rdata_q, ack: ack_q, err: err_q};

endmodule
