// tb_event_packager: checks the packet layout produced by event_packager.
//
// Packet 1 runs with the output always ready and a waveform source that is
// always valid: every word of header, data and trailer is compared with the
// expected packet, and the packet must take exactly 8 + 1000 + 8 clocks.
// Packet 2 stalls both the waveform source and the consumer at random and
// must still deliver the same word sequence.
module tb_event_packager;
  import gcu_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #4 clk = ~clk;

  logic               start_valid, start_ready;
  logic [15:0]        start_ch, start_trig_cnt, gcu_id;
  logic [TS_BITS-1:0] start_ts;
  logic               wf_valid, wf_ready;
  logic [15:0]        wf_data;
  logic               out_valid, out_ready, out_sop, out_eop;
  logic [15:0]        out_data;

  event_packager dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // expected packet, computed here from the packet format
  function automatic logic [15:0] expected(input int i, input logic [15:0] ch,
                                           input logic [47:0] ts, input logic [15:0] tc,
                                           input logic [15:0] id, input int seed);
    logic [15:0] hdr [8];
    logic [15:0] trl [8];
    hdr = '{16'h805a, ch, 16'd127, tc, 16'h0022, ts[47:32], ts[31:16], ts[15:0]};
    trl = '{16'h55aa, 16'h0123, 16'h4567, 16'h89ab, 16'hcdef, 16'hff00, id, 16'h0869};
    if (i < 8)         return hdr[i];
    else if (i < 1008) return 16'((i - 8) * 7 + seed);
    else               return trl[i - 1008];
  endfunction

  int wf_cnt;
  int stall_src, stall_dst;
  int seed;
  always_comb wf_data = 16'(wf_cnt * 7 + seed);

  always_ff @(posedge clk) if (wf_valid && wf_ready) wf_cnt <= wf_cnt + 1;

  task automatic run_packet(input logic [15:0] ch, input logic [47:0] ts,
                            input logic [15:0] tc, input logic [15:0] id,
                            input int stall, input bit check_time);
    int n, t0, t_end;
    wf_cnt = 0;
    stall_src = stall;
    stall_dst = stall;
    @(negedge clk);
    start_valid = 1'b1; start_ch = ch; start_ts = ts; start_trig_cnt = tc; gcu_id = id;
    check(start_ready, "start_ready while idle");
    @(negedge clk);
    start_valid = 1'b0;
    t0 = $time;
    n = 0;
    while (n < PKT_WORDS) begin
      out_ready = (stall == 0) || ($urandom_range(0, 3) != 0);
      wf_valid  = (stall == 0) || ($urandom_range(0, 2) != 0);
      #1;
      if (out_valid && out_ready) begin
        check(out_data == expected(n, ch, ts, tc, id, seed),
              $sformatf("word %0d got %h exp %h", n, out_data, expected(n, ch, ts, tc, id, seed)));
        check(out_sop == (n == 0), "sop position");
        check(out_eop == (n == PKT_WORDS - 1), "eop position");
        n++;
      end
      @(negedge clk);
      t_end = $time;
    end
    out_ready = 1'b1;
    if (check_time) check((t_end - t0) / 8 == PKT_WORDS,
                          $sformatf("packet took %0d clocks", (t_end - t0) / 8));
    @(negedge clk);
    check(start_ready, "idle after the packet");
    check(!out_valid, "no word after the trailer");
  endtask

  initial begin
    start_valid = 0; start_ch = 0; start_ts = 0; start_trig_cnt = 0; gcu_id = 0;
    out_ready = 1; wf_valid = 1; stall_src = 0; stall_dst = 0; seed = 3; wf_cnt = 0;
    repeat (4) @(posedge clk);
    rst = 1'b0;
    run_packet(16'h0002, 48'h0018_2dd4_ee03, 16'h85c9, 16'h0004, 0, 1'b1);
    seed = 11;
    run_packet(16'h0001, 48'h1234_5678_9abc, 16'h0001, 16'h0abc, 1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
