// tb_ddr3_ipbus_daq: IPbus side of the DDR3 readout.
//
// The testbench plays the DDR3 controller on the 125 MHz side (it answers a
// readout request by raising busy and pushing lines) and the DAQ on the
// IPbus side. Checked: a CTRL write toggles the request line; STATUS shows
// busy and the number of 32-bit words ready; DATA returns each 128-bit line
// as four words, bits 31:0 first, across back-to-back reads that must wait
// for the next line; DATA on an empty FIFO and writes to read-only
// registers answer err.
module tb_ddr3_ipbus_daq;
  import gcu_pkg::*;

  logic clk = 1'b0, ipb_clk = 1'b0;
  logic rst = 1'b1, ipb_rst = 1'b1;
  always #4  clk = ~clk;
  always #16 ipb_clk = ~ipb_clk;

  logic          fifo_wr_en;
  logic [127:0]  fifo_wr_data;
  logic [9:0]    fifo_wr_free;
  logic          rd_req_toggle, busy;
  ipb_wbus_t     ipb_in;
  ipb_rbus_t     ipb_out;

  ddr3_ipbus_daq dut (.*);
  ipb_master_bfm m (.clk (ipb_clk), .wbus (ipb_in), .rbus (ipb_out));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [127:0] line(input int n);
    return {32'(n * 4 + 3) ^ 32'hdead0000, 32'(n * 4 + 2) ^ 32'hdead0000,
            32'(n * 4 + 1) ^ 32'hdead0000, 32'(n * 4) ^ 32'hdead0000};
  endfunction

  task automatic push_lines(input int first, input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      fifo_wr_en = 1; fifo_wr_data = line(first + i);
    end
    @(negedge clk) fifo_wr_en = 0;
  endtask

  initial begin
    logic [31:0] d;
    bit err;
    logic t0;
    fifo_wr_en = 0; fifo_wr_data = 0; busy = 0;
    repeat (4) @(posedge ipb_clk);
    rst = 0; ipb_rst = 0;
    repeat (2) @(posedge ipb_clk);
    check(fifo_wr_free == 512, "FIFO of 512 lines (8 KB) empty after reset");
    m.read(32'h1, d, err);
    check(!err && d == 0, "status idle");
    m.read(32'h2, d, err);
    check(err, "DATA on empty answers err");
    m.write(32'h1, 0, err);
    check(err, "STATUS is read only");
    t0 = rd_req_toggle;
    m.write(32'h0, 32'h1, err);
    check(!err && rd_req_toggle != t0, "CTRL write requests a readout");
    m.write(32'h0, 32'h0, err);
    check(!err && rd_req_toggle != t0, "CTRL write of 0 does nothing");
    // controller answers
    @(negedge clk) busy = 1;
    push_lines(0, 3);
    repeat (6) @(posedge ipb_clk);
    m.read(32'h1, d, err);
    check(d[0] == 1'b1, "busy shown");
    check(d[31:8] == 12, $sformatf("12 words ready, got %0d", d[31:8]));
    for (int i = 0; i < 12; i++) begin
      m.read(32'h2, d, err);
      check(!err && d == (32'(i) ^ 32'hdead0000), $sformatf("word %0d = %h", i, d));
    end
    m.read(32'h2, d, err);
    check(err, "empty after 12 words");
    @(negedge clk) busy = 0;
    repeat (4) @(posedge ipb_clk);
    m.read(32'h1, d, err);
    check(d == 0, "idle again");
    check(fifo_wr_free == 512, "write side sees the FIFO empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge ipb_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
