// tb_l1_cache: triggered extraction from the circular buffers.
//
// Every sample the testbench feeds is a known function of its timestamp,
// position and channel, so the expected content of any packet is computed
// here without looking at the buffer. Checked:
//  * external mode: a validated trigger for channels 0 and 2 gives two
//    packets, in channel order, with header (channel, size, trigger count,
//    timestamp), the 1000 samples starting at the trigger timestamp, and the
//    trailer with the GCU ID; each packet streams in 1016 clocks;
//  * local triggers are ignored in external mode and used in self mode;
//  * a trigger older than the buffer can hold is dropped (drop_late), and a
//    window close to the age limit is still read out intact;
//  * a packet that does not fit downstream is dropped (drop_room);
//  * a burst of triggers overflows the 4-entry queue (drop_queue), and every
//    trigger is either read out or counted as dropped.
module tb_l1_cache;
  import gcu_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #4 clk = ~clk;

  logic [NCH-1:0][SAMPLES_PER_CLK-1:0][ADC_BITS-1:0] adc;
  logic [TS_BITS-1:0] ts_now;
  logic               self_trig;
  logic [NCH-1:0]     ch_enable;
  logic [15:0]        gcu_id;
  logic               ext_valid, loc_valid;
  trig_t              ext_trig, loc_trig;
  logic [31:0]        room_words;
  logic               out_valid, out_ready, out_sop, out_eop;
  logic [15:0]        out_data;
  logic [31:0]        pkt_count, drop_queue, drop_room, drop_late;

  l1_cache dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [13:0] sample(input logic [47:0] ts, input int k, input int ch);
    return 14'(ts * 8 + 48'(k) + 48'(ch) * 1000 + 48'(ch) * ts);
  endfunction

  // source: timestamp counter and samples
  always_ff @(posedge clk) begin
    if (rst) ts_now <= 48'h0000_0100_0000;
    else     ts_now <= ts_now + 1;
  end
  always_comb
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < SAMPLES_PER_CLK; k++) adc[c][k] = sample(ts_now, k, c);

  // sink: collect packets
  logic [15:0] cur [$];
  logic [15:0] pkts [$][$];
  longint      t_sop [$];
  longint      t_eop [$];
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    if (out_sop) begin cur = {}; t_sop.push_back($time); end
    cur.push_back(out_data);
    if (out_eop) begin pkts.push_back(cur); t_eop.push_back($time); end
  end

  task automatic check_packet(input int idx, input int ch, input logic [47:0] ts,
                              input logic [15:0] tcnt);
    logic [15:0] p [$];
    int bad = 0;
    if (idx >= pkts.size()) begin check(0, $sformatf("packet %0d missing", idx)); return; end
    p = pkts[idx];
    check(p.size() == PKT_WORDS, $sformatf("packet %0d size %0d", idx, p.size()));
    if (p.size() != PKT_WORDS) return;
    check(p[0] == 16'h805a && p[1] == 16'(ch) && p[2] == 16'd127 && p[3] == tcnt
          && p[4] == 16'h0022, $sformatf("packet %0d header %h %h %h %h %h", idx, p[0], p[1], p[2], p[3], p[4]));
    check({p[5], p[6], p[7]} == ts, $sformatf("packet %0d timestamp", idx));
    for (int i = 0; i < WAVE_SAMPLES; i++)
      if (p[8 + i] != 16'(sample(ts + 48'(i / 8), i % 8, ch))) bad++;
    check(bad == 0, $sformatf("packet %0d: %0d wrong samples", idx, bad));
    check(p[1008] == 16'h55aa && p[1013] == 16'hff00 && p[1014] == gcu_id && p[1015] == 16'h0869,
          $sformatf("packet %0d trailer", idx));
    check((t_eop[idx] - t_sop[idx]) / 8 == PKT_WORDS - 1, $sformatf("packet %0d took %0d clocks",
          idx, (t_eop[idx] - t_sop[idx]) / 8 + 1));
  endtask

  task automatic trig_ext(input logic [2:0] mask, input logic [47:0] ts);
    @(negedge clk);
    ext_valid = 1; ext_trig = '{chmask: mask, ts: ts};
    @(negedge clk);
    ext_valid = 0;
  endtask

  task automatic trig_loc(input logic [2:0] mask, input logic [47:0] ts);
    @(negedge clk);
    loc_valid = 1; loc_trig = '{chmask: mask, ts: ts};
    @(negedge clk);
    loc_valid = 0;
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  logic [47:0] t1, t2;
  int n_burst;

  initial begin
    self_trig = 0; ch_enable = 3'b111; gcu_id = 16'h0004; ext_valid = 0; loc_valid = 0;
    ext_trig = '0; loc_trig = '0; room_words = 32'd100000; out_ready = 1;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    idle(4100);                      // fill the buffers once around

    // external trigger, validated 50 lines after the event
    t1 = ts_now - 50;
    trig_ext(3'b101, t1);
    // a local trigger in external mode is ignored
    trig_loc(3'b010, ts_now - 10);
    idle(2200);
    check(pkts.size() == 2, $sformatf("two packets, got %0d", pkts.size()));
    check_packet(0, 0, t1, 16'd1);
    check_packet(1, 2, t1, 16'd1);

    // self-triggering mode
    self_trig = 1;
    t2 = ts_now - 3;
    trig_loc(3'b010, t2);
    trig_ext(3'b001, ts_now - 5);    // ignored in self mode
    idle(1100);
    check(pkts.size() == 3, "one packet in self mode");
    check_packet(2, 1, t2, 16'd2);

    // too old: the window start has been overwritten
    trig_loc(3'b001, ts_now - 3990);
    idle(20);
    check(drop_late == 1, $sformatf("late drop %0d", drop_late));
    check(pkts.size() == 3, "no packet for a late trigger");

    // no room downstream
    room_words = PKT_WORDS - 1;
    trig_loc(3'b100, ts_now - 5);
    idle(20);
    check(drop_room == 1, "room drop");
    room_words = 32'd100000;

    // burst of seven single-channel triggers
    n_burst = 7;
    for (int i = 0; i < n_burst; i++) trig_loc(3'b001, ts_now - 2);
    idle(8000);
    check(drop_queue >= 1, $sformatf("queue overflow seen (%0d)", drop_queue));
    check(pkt_count - 3 + drop_queue + (drop_late - 1) == 32'(n_burst),
          $sformatf("burst accounted: pkts %0d queue %0d late %0d", pkt_count - 3, drop_queue, drop_late - 1));
    check(pkts.size() == int'(pkt_count), "every counted packet was delivered");

    // the oldest window that can still be read whole (limit 3101 lines)
    n_burst = int'(drop_late);
    t1 = ts_now - 3090;
    trig_loc(3'b100, t1);
    idle(1100);
    check(pkts.size() == int'(pkt_count) && int'(drop_late) == n_burst,
          $sformatf("old but readable window accepted (late %0d)", int'(drop_late) - n_burst));
    check_packet(pkts.size() - 1, 2, t1, pkts[pkts.size() - 1][3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
