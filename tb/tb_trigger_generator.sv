// tb_trigger_generator: threshold crossing, timestamps, hold-off, enables.
//
// The testbench keeps its own line counter to know each line's timestamp and
// drives chosen pulses. It checks that a rising crossing produces exactly one
// request, one clock after its line, carrying that line's timestamp and the
// right channel mask; that a crossing at a line boundary is seen; that a
// second pulse inside the hold-off window is ignored and one after it is not;
// that a disabled channel stays silent; and that loading the timestamp works.
module tb_trigger_generator;
  import gcu_pkg::*;

  localparam int HOLD = 125;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #4 clk = ~clk;

  logic [NCH-1:0][SAMPLES_PER_CLK-1:0][ADC_BITS-1:0] adc;
  logic [NCH-1:0][ADC_BITS-1:0] threshold;
  logic [NCH-1:0]     ch_enable;
  logic               ts_load;
  logic [TS_BITS-1:0] ts_load_value, ts_now;
  logic               trig_valid;
  trig_t              trig;

  trigger_generator dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // record of requests seen
  int          n_req;
  logic [47:0] req_ts [$];
  logic [2:0]  req_mask [$];
  always @(posedge clk) if (!rst && trig_valid) begin
    n_req++;
    req_ts.push_back(trig.ts);
    req_mask.push_back(trig.chmask);
  end

  // line with a pulse on channel c starting at sample k
  task automatic line(input int c, input int k, input logic [47:0] exp_ts_dummy);
    @(negedge clk);
    adc = '0;
    foreach (adc[ch, s]) adc[ch][s] = 14'd200;
    if (c >= 0) for (int s = k; s < SAMPLES_PER_CLK; s++) adc[c][s] = 14'd3000;
  endtask

  task automatic quiet(input int n);
    repeat (n) line(-1, 0, 0);
  endtask

  logic [47:0] t_pulse;

  initial begin
    adc = '0; threshold = {14'd1000, 14'd1500, 14'd1000}; ch_enable = 3'b111;
    ts_load = 0; ts_load_value = 0; n_req = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    quiet(5);

    // single pulse on channel 1, crossing at sample 3
    line(1, 3, 0);
    t_pulse = ts_now;
    quiet(2);
    check(n_req == 1, $sformatf("one request, got %0d", n_req));
    if (req_ts.size() > 0) begin
      check(req_ts[0] == t_pulse, $sformatf("ts %0d exp %0d", req_ts[0], t_pulse));
      check(req_mask[0] == 3'b010, "mask channel 1");
    end
    // pulse on channel 1 again inside hold-off: ignored; channel 0 is free
    quiet(10);
    line(1, 0, 0);
    quiet(1);
    check(n_req == 1, "second pulse inside hold-off ignored");
    quiet(HOLD);
    // channel 0 crossing at the line boundary (sample 0 after a low sample)
    line(0, 0, 0);
    t_pulse = ts_now;
    quiet(2);
    check(n_req == 2, "boundary crossing triggers");
    if (req_ts.size() > 1) begin
      check(req_ts[1] == t_pulse, "boundary crossing timestamp");
      check(req_mask[1] == 3'b001, "mask channel 0");
    end
    // channel 1 again after its hold-off: accepted
    line(1, 5, 0);
    quiet(2);
    check(n_req == 3, "pulse after hold-off accepted");
    // two channels in the same line -> one request, two bits
    quiet(HOLD);
    @(negedge clk);
    foreach (adc[ch, s]) adc[ch][s] = 14'd200;
    for (int s = 2; s < 8; s++) begin adc[0][s] = 14'd3000; adc[2][s] = 14'd3000; end
    t_pulse = ts_now;
    quiet(2);
    check(n_req == 4 && req_mask[3] == 3'b101 && req_ts[3] == t_pulse, "two channels in one request");
    // disabled channel
    quiet(HOLD);
    ch_enable = 3'b011;
    line(2, 1, 0);
    quiet(2);
    check(n_req == 4, "disabled channel silent");
    // amplitude just below threshold of channel 1 (1500)
    @(negedge clk);
    foreach (adc[ch, s]) adc[ch][s] = 14'd200;
    adc[1][4] = 14'd1499;
    quiet(2);
    check(n_req == 4, "below threshold silent");
    // timestamp load
    @(negedge clk); ts_load = 1; ts_load_value = 48'h0018_2dd4_ee00;
    @(negedge clk); ts_load = 0;
    check(ts_now == 48'h0018_2dd4_ee00, "timestamp loaded");
    quiet(3);
    check(ts_now == 48'h0018_2dd4_ee03, "timestamp counts in lines");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
