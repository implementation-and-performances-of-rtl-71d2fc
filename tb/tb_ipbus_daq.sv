// tb_ipbus_daq: packing, capacity and IPbus access of the funnel FIFO.
//
// Packets of 16-bit words are pushed on the 125 MHz clock and read back over
// IPbus on a 31.25 MHz clock. The testbench checks: reset state (occupancy 0,
// room 4096 words); occupancy after two packets; the 32-bit words (first
// 16-bit word in bits 31:16); err on reading an empty FIFO and on writing;
// that the default FIFO holds exactly 2^13 bytes: four 1016-word packets fit
// and in_ready drops after 4096 words.
module tb_ipbus_daq;
  import gcu_pkg::*;

  logic clk = 1'b0, ipb_clk = 1'b0;
  logic rst = 1'b1, ipb_rst = 1'b1;
  always #4  clk = ~clk;
  always #16 ipb_clk = ~ipb_clk;

  logic        in_valid, in_ready, in_sop, in_eop;
  logic [15:0] in_data;
  logic [31:0] room_words;
  ipb_wbus_t   ipb_in;
  ipb_rbus_t   ipb_out;

  ipbus_daq dut (.*);
  ipb_master_bfm m (.clk (ipb_clk), .wbus (ipb_in), .rbus (ipb_out));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] word(input int p, input int i);
    return 16'(p * 4099 + i * 3);
  endfunction

  // push one packet of n words; returns number accepted
  task automatic push(input int p, input int n, output int accepted);
    accepted = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = word(p, i); in_sop = (i == 0); in_eop = (i == n - 1);
      #1;
      if (in_ready) accepted++;
      else begin
        @(negedge clk) in_valid = 0;
        return;
      end
    end
    @(negedge clk) in_valid = 0; in_sop = 0; in_eop = 0;
  endtask

  initial begin
    logic [31:0] d;
    bit err;
    int acc;
    in_valid = 0; in_sop = 0; in_eop = 0; in_data = 0;
    repeat (4) @(posedge ipb_clk);
    rst = 0; ipb_rst = 0;
    repeat (2) @(posedge ipb_clk);
    check(room_words == 4096, $sformatf("room %0d", room_words));
    m.read(32'h1, d, err);
    check(!err && d == 0, "occupancy 0 after reset");
    m.read(32'h0, d, err);
    check(err, "read of empty FIFO answers err");
    m.write(32'h0, 32'h1, err);
    check(err, "write answers err");
    // two short packets of 10 and 6 words
    push(1, 10, acc);
    push(2, 6, acc);
    repeat (6) @(posedge ipb_clk);
    check(room_words == 4096 - 16, $sformatf("room after 16 words %0d", room_words));
    m.read(32'h1, d, err);
    check(!err && d == 8, $sformatf("occupancy 8, got %0d", d));
    for (int i = 0; i < 5; i++) begin
      m.read(32'h0, d, err);
      check(!err && d == {word(1, 2*i), word(1, 2*i+1)}, $sformatf("packet 1 word %0d = %h", i, d));
    end
    for (int i = 0; i < 3; i++) begin
      m.read(32'h0, d, err);
      check(!err && d == {word(2, 2*i), word(2, 2*i+1)}, $sformatf("packet 2 word %0d = %h", i, d));
    end
    m.read(32'h0, d, err);
    check(err, "empty again");
    // capacity: four full packets, then one more word is refused
    repeat (6) @(posedge ipb_clk);
    for (int p = 0; p < 4; p++) begin
      push(10 + p, PKT_WORDS, acc);
      check(acc == PKT_WORDS, $sformatf("packet %0d accepted %0d", p, acc));
    end
    check(room_words == 4096 - 4 * PKT_WORDS, "room after four packets");
    push(20, 100, acc);
    check(acc == 4096 - 4 * PKT_WORDS, $sformatf("fill to 2^13 bytes: accepted %0d", acc));
    repeat (6) @(posedge ipb_clk);
    m.read(32'h1, d, err);
    check(d == 2048, $sformatf("occupancy 2048, got %0d", d));
    // first word of the third big packet, after reading two packets
    for (int i = 0; i < PKT_WORDS; i++) m.read(32'h0, d, err);
    m.read(32'h0, d, err);
    check(d == {word(12, 0), word(12, 1)}, "third packet starts aligned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge ipb_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
