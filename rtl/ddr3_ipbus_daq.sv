// ddr3_ipbus_daq: IPbus slave that empties the DDR3 buffer.
//
// A write to CTRL asks the DDR3 controller for a readout; the controller
// blocks writing, streams the stored 128-bit lines into this module's
// asynchronous FIFO and resumes writing once the memory and the FIFO are
// empty. The DAQ reads the content 32 bits at a time from DATA.
//   offset 0  CTRL       write bit 0 = 1: request a readout
//   offset 1  STATUS     bit 0 readout in progress; bits 31:8 number of
//                        32-bit words ready in the FIFO
//   offset 2  DATA       read pops one 32-bit word; err when none is ready
// Each 128-bit line is returned as four words, bits 31:0 first, so the first
// 16-bit packet word of a line sits in bits 15:0 of the first word.
//
// That the DAQ requests the content over IPbus and the DDR3 is then emptied
// by this module follows the paper; the register map, FIFO size (8 KB, as
// the IPbus DAQ FIFO) and word order are this design's.
//
// Timing: IPbus ack/err one ipb_clk after the strobe; a DATA read that finds
// the holding register empty but the FIFO not empty waits two extra clocks
// for the next line before it is acknowledged.
module ddr3_ipbus_daq
  import gcu_pkg::*;
#(
  parameter int unsigned FIFO_AW = 9
) (
  // system clock side (DDR3 controller)
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 fifo_wr_en,
  input  logic [LINE_BITS-1:0] fifo_wr_data,
  output logic [FIFO_AW:0]     fifo_wr_free,
  output logic                 rd_req_toggle,
  input  logic                 busy,
  // IPbus side
  input  logic                 ipb_clk,
  input  logic                 ipb_rst,
  input  ipb_wbus_t            ipb_in,
  output ipb_rbus_t            ipb_out
);

  logic                 rd_en, rd_empty;
  logic [LINE_BITS-1:0] rd_data;
  logic [FIFO_AW:0]     rd_count;
  logic                 wr_full;

  async_fifo #(.WIDTH(LINE_BITS), .AW(FIFO_AW)) u_fifo (
    .wr_clk (clk),     .wr_rst (rst),
    .wr_en  (fifo_wr_en), .wr_data (fifo_wr_data),
    .wr_full,          .wr_free (fifo_wr_free),
    .rd_clk (ipb_clk), .rd_rst (ipb_rst),
    .rd_en,            .rd_data,
    .rd_empty,         .rd_count
  );

  logic [LINE_BITS-1:0] hold;
  logic [2:0]           hold_cnt;     // 32-bit words left in hold
  logic                 fetching;     // rd_data becomes valid next clock
  logic                 busy_s1, busy_s2;
  logic                 ack_q, err_q;
  logic [31:0]          rdata_q;
  logic                 new_tr;
  logic [1:0]           reg_sel;

  assign new_tr  = ipb_in.strobe && !ack_q && !err_q;
  assign reg_sel = ipb_in.addr[1:0];
  assign rd_en   = !fetching && hold_cnt == '0 && !rd_empty;

  always_ff @(posedge ipb_clk) begin
    if (ipb_rst) begin
      hold          <= '0;
      hold_cnt      <= '0;
      fetching      <= 1'b0;
      busy_s1       <= 1'b0;
      busy_s2       <= 1'b0;
      ack_q         <= 1'b0;
      err_q         <= 1'b0;
      rdata_q       <= '0;
      rd_req_toggle <= 1'b0;
    end else begin
      busy_s1  <= busy;
      busy_s2  <= busy_s1;
      ack_q    <= 1'b0;
      err_q    <= 1'b0;
      fetching <= rd_en;
      if (fetching) begin
        hold     <= rd_data;
        hold_cnt <= 3'd4;
      end
      if (new_tr) begin
        unique case (reg_sel)
          2'd0: if (ipb_in.write) begin
                  if (ipb_in.wdata[0]) rd_req_toggle <= !rd_req_toggle;
                  ack_q <= 1'b1;
                end else begin
                  rdata_q <= 32'(busy_s2);
                  ack_q   <= 1'b1;
                end
          2'd1: if (ipb_in.write) err_q <= 1'b1;
                else begin
                  rdata_q <= {24'(32'(rd_count) * 4 + 32'(hold_cnt)), 7'b0, busy_s2};
                  ack_q   <= 1'b1;
                end
          2'd2: if (ipb_in.write) err_q <= 1'b1;
                else if (hold_cnt != '0) begin
                  rdata_q  <= hold[31:0];
                  hold     <= hold >> 32;
                  hold_cnt <= hold_cnt - 1'b1;
                  ack_q    <= 1'b1;
                end else if (!fetching && rd_empty) begin
                  err_q <= 1'b1;
                end
                // otherwise a line is on its way: no answer yet, the master
                // keeps the strobe and the read completes a clock later
          default: err_q <= 1'b1;
        endcase
      end
    end
  end

  assign ipb_out = '{rdata: rdata_q, ack: ack_q, err: err_q};

  // Lines are only pushed when there is space for them.
  assert property (@(posedge clk) disable iff (rst) fifo_wr_en |-> !wr_full);

endmodule
