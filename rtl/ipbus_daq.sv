// ipbus_daq: the "funnel" FIFO between the L1 cache and the IPbus readout.
//
// Packets of all channels arrive, one after the other, as 16-bit words on the
// system clock. Pairs of words are packed into 32-bit words and written into
// an asynchronous FIFO of 2^13 bytes (2048 x 32 bits, room for four 1016-word
// packets). The DAQ reads the FIFO through two IPbus registers on the IPbus
// clock:
//   offset 0  DATA       read pops one 32-bit word; read on empty -> ipb err
//   offset 1  OCCUPANCY  number of 32-bit words held (read side's view)
// A client polls OCCUPANCY and then reads a block of the size it wants from
// DATA, which is how a DAQ "buffer size" request maps onto this slave.
//
// The FIFO size, its asynchronous nature, the funnelling of all channels into
// one FIFO and the exposed occupancy follow the paper. The register map, the
// packing (first 16-bit word in bits 31:16) and the error on an empty read
// are this design's. Packets are an even number of words, so every packet
// starts on a 32-bit boundary.
//
// Timing: in_ready is high unless the FIFO is full; the upstream checks
// room_words (free space in 16-bit words, conservative) before it starts a
// packet. IPbus: ack (or err) one ipb_clk after the strobe, then one
// transaction per two clocks while strobe stays high. in_eop is only used by
// an assertion that packets have an even number of words. Only address bits
// 1:0 and the strobe/write flags of ipb_in are decoded here (the fabric has
// already decoded the slave select; the slave takes no write data), so lint
// reports the other ipb_in bits as unused.
module ipbus_daq
  import gcu_pkg::*;
#(
  parameter int unsigned AW = 11     // 2^AW 32-bit words = 2^13 bytes
) (
  // write side, system clock
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [15:0] in_data,
  input  logic        in_sop,
  input  logic        in_eop,
  output logic [31:0] room_words,
  // IPbus side
  input  logic        ipb_clk,
  input  logic        ipb_rst,
  input  ipb_wbus_t   ipb_in,
  output ipb_rbus_t   ipb_out
);

  logic [15:0] hi_q;
  logic        have_hi;
  logic        wr_en, wr_full;
  logic [AW:0] wr_free;
  logic        rd_en, rd_empty;
  logic [31:0] rd_data;
  logic [AW:0] rd_count;

  // ---------------- packing ----------------
  assign in_ready   = !wr_full;
  assign wr_en      = in_valid && in_ready && have_hi && !in_sop;
  assign room_words = 32'(wr_free) * 2 - (have_hi ? 32'd1 : 32'd0);

  always_ff @(posedge clk) begin
    if (rst) begin
      have_hi <= 1'b0;
      hi_q    <= '0;
    end else if (in_valid && in_ready) begin
      if (in_sop || !have_hi) begin
        hi_q    <= in_data;
        have_hi <= 1'b1;
      end else begin
        have_hi <= 1'b0;
      end
    end
  end

  async_fifo #(.WIDTH(32), .AW(AW)) u_fifo (
    .wr_clk (clk),     .wr_rst (rst),
    .wr_en,            .wr_data ({hi_q, in_data}),
    .wr_full,          .wr_free,
    .rd_clk (ipb_clk), .rd_rst (ipb_rst),
    .rd_en,            .rd_data,
    .rd_empty,         .rd_count
  );

  // ---------------- IPbus slave ----------------
  logic        new_tr;
  logic        ack_q, err_q;
  logic        sel_data_q;
  logic [31:0] occ_q;

  assign new_tr = ipb_in.strobe && !ack_q && !err_q;
  assign rd_en  = new_tr && !ipb_in.write && (ipb_in.addr[0] == 1'b0) && !rd_empty;

  always_ff @(posedge ipb_clk) begin
    if (ipb_rst) begin
      ack_q <= 1'b0;
      err_q <= 1'b0;
      sel_data_q  <= 1'b0;
      occ_q       <= '0;
    end else begin
      ack_q <= 1'b0;
      err_q <= 1'b0;
      if (new_tr) begin
        sel_data_q <= (ipb_in.addr[0] == 1'b0);
        occ_q      <= 32'(rd_count);
        if (ipb_in.write || (ipb_in.addr[0] == 1'b0 && rd_empty)) err_q <= 1'b1;
        else                                                     ack_q <= 1'b1;
      end
    end
  end

  assign ipb_out = '{rdata: sel_data_q ? rd_data : occ_q, ack: ack_q, err: err_q};

  // A word is written only in pairs: a start-of-packet never lands on an
  // odd position.
  property p_sop_aligned;
    @(posedge clk) disable iff (rst) (in_valid && in_ready && in_sop) |-> !have_hi;
  endproperty
  assert property (p_sop_aligned);

  // Packets must have an even number of words: the last word completes a
  // 32-bit word.
  property p_eop_aligned;
    @(posedge clk) disable iff (rst) (in_valid && in_ready && in_eop) |-> have_hi;
  endproperty
  assert property (p_eop_aligned);

endmodule
