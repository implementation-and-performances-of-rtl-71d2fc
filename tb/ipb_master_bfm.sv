// ipb_master_bfm: IPbus master for testbenches.
//
// write() and read() run one IPbus transaction each: they raise strobe with
// address (and data) after a clock edge, wait for ack or err, and drop strobe
// again. A transaction that gets no answer within 1000 clocks returns err.
// read_block() is a non-incrementing block read: strobe stays high at one
// address and every ack delivers one word, until n words have been read or
// the slave answers err.
module ipb_master_bfm
  import gcu_pkg::*;
(
  input  logic      clk,
  output ipb_wbus_t wbus,
  input  ipb_rbus_t rbus
);

  initial wbus = '0;

  task automatic write(input logic [31:0] addr, input logic [31:0] data, output bit err);
    int n = 0;
    @(negedge clk);
    wbus = '{addr: addr, wdata: data, strobe: 1'b1, write: 1'b1};
    do begin
      @(posedge clk); #1;
      n++;
    end while (!rbus.ack && !rbus.err && n < 1000);
    err = !rbus.ack;
    @(negedge clk);
    wbus = '0;
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data, output bit err);
    int n = 0;
    @(negedge clk);
    wbus = '{addr: addr, wdata: 32'h0, strobe: 1'b1, write: 1'b0};
    do begin
      @(posedge clk); #1;
      n++;
    end while (!rbus.ack && !rbus.err && n < 1000);
    err  = !rbus.ack;
    data = rbus.rdata;
    @(negedge clk);
    wbus = '0;
  endtask

  task automatic read_block(input logic [31:0] addr, input int n,
                            output logic [31:0] data [$], output bit err);
    int k = 0, t = 0;
    data = {};
    err  = 1'b0;
    @(negedge clk);
    wbus = '{addr: addr, wdata: 32'h0, strobe: 1'b1, write: 1'b0};
    while (k < n && t < 1000) begin
      @(posedge clk); #1;
      if (rbus.ack) begin data.push_back(rbus.rdata); k++; t = 0; end
      else if (rbus.err) begin err = 1'b1; break; end
      else t++;
    end
    if (t >= 1000) err = 1'b1;
    @(negedge clk);
    wbus = '0;
  endtask

endmodule
