// tb_trigger_manager: register map of the acquisition settings slave.
//
// Checks the reset values, write/read-back of every writable register, that
// the outputs follow the registers, that the firmware version and timestamp
// registers are read only, and that an unused offset answers err.
module tb_trigger_manager;
  import gcu_pkg::*;

  logic ipb_clk = 1'b0;
  logic ipb_rst = 1'b1;
  always #16 ipb_clk = ~ipb_clk;

  ipb_wbus_t ipb_in;
  ipb_rbus_t ipb_out;
  logic [TS_BITS-1:0] ts_now;
  logic self_trig, ddr3_enable;
  logic [NCH-1:0] ch_enable;
  logic [NCH-1:0][ADC_BITS-1:0] threshold;
  logic [15:0] gcu_id;

  trigger_manager dut (.*);
  ipb_master_bfm m (.clk (ipb_clk), .wbus (ipb_in), .rbus (ipb_out));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] d;
    bit err;
    ts_now = 48'h1234_5678_9abc;
    repeat (3) @(posedge ipb_clk);
    ipb_rst = 0;
    m.read(32'h0, d, err);
    check(!err && d == 32'h1e, $sformatf("CTRL reset value %h", d));
    check(!self_trig && ch_enable == 3'b111 && ddr3_enable, "reset: external mode, all enabled");
    m.read(32'h5, d, err);
    check(!err && d == 32'h22, "firmware version");
    m.read(32'h6, d, err);
    check(d == 32'h5678_9abc, "TS_LO");
    m.read(32'h7, d, err);
    check(d == 32'h1234, "TS_HI");
    m.write(32'h0, 32'h0b, err);
    check(!err && self_trig && ch_enable == 3'b101 && !ddr3_enable, "CTRL write drives outputs");
    m.read(32'h0, d, err);
    check(d == 32'h0b, "CTRL read back");
    for (int c = 0; c < 3; c++) m.write(32'(1 + c), 32'(100 * (c + 1)), err);
    check(threshold[0] == 100 && threshold[1] == 200 && threshold[2] == 300, "thresholds");
    m.read(32'h3, d, err);
    check(d == 300, "threshold 2 read back");
    m.write(32'h4, 32'hbeef, err);
    check(gcu_id == 16'hbeef, "GCU ID");
    m.write(32'h5, 32'h1, err);
    check(err, "firmware version read only");
    m.write(32'h7, 32'h1, err);
    check(err, "TS_HI read only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge ipb_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
