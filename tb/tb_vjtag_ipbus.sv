// tb_vjtag_ipbus: JTAG shift commands over IPbus.
//
// The JTAG target is a 64-bit shift register clocked by TCK: it takes TDI on
// the rising edge and presents its lowest bit on TDO after the falling edge,
// as a device in a scan chain does. The testbench also records TMS at every
// rising edge. Checked: a 32-bit and a 7-bit command produce that many TCK
// pulses with the TMS and TDI vectors bit 0 first; TDO returns the target's
// previous content; busy, the command duration (2*HALF clocks per bit) and
// err for a command written while busy.
module tb_vjtag_ipbus;
  import gcu_pkg::*;

  localparam int HALF = 4;

  logic ipb_clk = 1'b0;
  logic ipb_rst = 1'b1;
  always #16 ipb_clk = ~ipb_clk;

  ipb_wbus_t ipb_in;
  ipb_rbus_t ipb_out;
  logic tck, tms, tdi, tdo;

  vjtag_ipbus #(.HALF(HALF)) dut (.*);
  ipb_master_bfm m (.clk (ipb_clk), .wbus (ipb_in), .rbus (ipb_out));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // JTAG target
  logic [63:0] sr;
  logic [63:0] tms_seen;
  int          n_tck;
  always @(posedge tck) begin
    tms_seen = {tms, tms_seen[63:1]};
    sr       = {tdi, sr[63:1]};
    n_tck++;
  end
  always @(negedge tck) tdo = sr[0];

  task automatic shift(input int n, input logic [31:0] tmsv, input logic [31:0] tdiv,
                       output logic [31:0] tdov, output int clocks);
    logic [31:0] d;
    bit err;
    int t0;
    m.write(32'h1, tmsv, err);
    m.write(32'h2, tdiv, err);
    m.write(32'h0, 32'h8000_0000 | 32'(n - 1), err);
    t0 = $time;
    do m.read(32'h0, d, err); while (d[0]);
    clocks = ($time - t0) / 32;
    m.read(32'h3, tdov, err);
  endtask

  initial begin
    logic [31:0] tdov, d;
    logic [63:0] prev;
    int clocks;
    bit err;
    sr = 64'h0123_4567_89ab_cdef; tms_seen = 0; n_tck = 0; tdo = sr[0];
    repeat (3) @(posedge ipb_clk);
    ipb_rst = 0;
    check(!tck, "TCK idles low");
    // 32-bit command
    prev = sr;
    shift(32, 32'h8000_0003, 32'hdead_beef, tdov, clocks);
    check(n_tck == 32, $sformatf("32 TCK pulses, got %0d", n_tck));
    check(tms_seen[63:32] == 32'h8000_0003, $sformatf("TMS sequence %h", tms_seen[63:32]));
    check(sr[63:32] == 32'hdead_beef, $sformatf("TDI shifted in %h", sr[63:32]));
    check(tdov == prev[31:0], $sformatf("TDO %h exp %h", tdov, prev[31:0]));
    check(clocks >= 2 * HALF * 32 && clocks <= 2 * HALF * 32 + 20,
          $sformatf("duration %0d clocks", clocks));
    // 7-bit command
    prev = sr; n_tck = 0;
    shift(7, 32'h0000_0055, 32'h0000_0011, tdov, clocks);
    check(n_tck == 7, "7 TCK pulses");
    check(tms_seen[63:57] == 7'h55, "TMS 7 bits");
    check(sr[63:57] == 7'h11, "TDI 7 bits");
    check(tdov[6:0] == prev[6:0] && tdov[31:7] == 0, $sformatf("TDO 7 bits %h", tdov));
    // command while busy
    m.write(32'h0, 32'h8000_001f, err);
    m.write(32'h0, 32'h8000_001f, err);
    check(err, "command while busy answers err");
    do m.read(32'h0, d, err); while (d[0]);
    m.write(32'h3, 32'h0, err);
    check(err, "TDO is read only");
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
