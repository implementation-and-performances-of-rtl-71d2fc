// tb_gcu_rate: trigger-rate scan of one GCU at full size.
//
// Validated triggers for all three channels arrive at a fixed rate while a
// DAQ client empties the funnel FIFO over IPbus: it polls OCCUPANCY and, when
// data is there, reads min(occupancy, BS) words from DATA in one
// non-incrementing block read, BS being the DAQ buffer size. Every packet
// received is checked (header, trigger timestamp, all 1000 samples,
// trailer). For each run the testbench reports the survival fraction
// (packets received / packets expected) and the bandwidth (2032 bytes per
// packet received, over the time from the first trigger to the last packet
// received), and checks that every trigger is either
// received or counted by a drop counter.
//
// Runs (IPbus clock 31.25 MHz, so a block read moves at most 4 bytes every
// two clocks = 62.5 MB/s):
//   1 kHz, BS 2048   design rate: no loss
//   10 kHz, BS 2048  ~61 MB/s of packets: no loss
//   20 kHz, BS 2048  beyond the read bandwidth: losses, bandwidth saturates
//   20 kHz, BS 64    small blocks: the polling overhead costs bandwidth
// The bandwidth ceiling here is set by the IPbus clock of this testbench;
// on a board it is set by the IPbus/Ethernet path, which is not modelled.
module tb_gcu_rate;
  import gcu_pkg::*;

  logic clk = 1'b0, ipb_clk = 1'b0, s6_ipb_clk = 1'b0;
  logic rst = 1'b1, ipb_rst = 1'b1, s6_ipb_rst = 1'b1;
  always #4  clk = ~clk;
  always #16 ipb_clk = ~ipb_clk;
  always #15 s6_ipb_clk = ~s6_ipb_clk;

  logic [NCH-1:0][SAMPLES_PER_CLK-1:0][ADC_BITS-1:0] adc;
  logic               ts_load;
  logic [TS_BITS-1:0] ts_load_value;
  logic               trig_req_valid, ext_trig_valid;
  trig_t              trig_req, ext_trig;
  ipb_wbus_t          ipb_in, s6_ipb_in;
  ipb_rbus_t          ipb_out, s6_ipb_out;
  logic               app_en, app_cmd, app_rdy, app_wdf_wren, app_wdf_rdy, app_rd_data_valid;
  logic [26:0]        app_addr;
  logic [127:0]       app_wdf_data, app_rd_data;
  logic               scl_oe, scl_i, sda_oe, sda_i;
  logic               jtag_tck, jtag_tms, jtag_tdi, jtag_tdo;
  logic [31:0]        l1_pkt_count, l1_drop_queue, l1_drop_room, l1_drop_late;
  logic [31:0]        ddr3_pkt_count, ddr3_drop_room, ddr3_lines_used;

  gcu_top dut (.*);
  ipb_master_bfm k7 (.clk (ipb_clk), .wbus (ipb_in), .rbus (ipb_out));
  ddr3_model #(.AW(27)) mem (.clk, .*);

  // Spartan-6 side idle: lines pulled up, no JTAG target
  assign s6_ipb_in = '0;
  assign scl_i     = !scl_oe;
  assign sda_i     = !sda_oe;
  assign jtag_tdo  = 1'b0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [13:0] sample(input logic [47:0] ts, input int k, input int ch);
    return 14'(200 + int'(((ts * 8 + 48'(k)) * 13 + 48'(ch) * 77) % 1000));
  endfunction

  always_comb
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < SAMPLES_PER_CLK; k++) adc[c][k] = sample(dut.ts_now, k, c);

  // triggers sent in the current run
  logic [47:0] sent_ts [$];
  bit          sending;

  // packet reassembly
  logic [15:0] cur [$];
  int          n_good, n_bad;
  longint      t_last;

  task automatic take_word(input logic [15:0] w);
    int bad;
    logic [47:0] ts;
    cur.push_back(w);
    if (cur.size() < PKT_WORDS) return;
    bad = 0;
    ts  = {cur[5], cur[6], cur[7]};
    if (cur[0] != 16'h805a || cur[1] > 2 || cur[2] != 16'd127 || cur[1015] != 16'h0869) bad++;
    if (!(ts inside {sent_ts})) bad++;
    for (int i = 0; i < WAVE_SAMPLES && bad == 0; i++)
      if (cur[8 + i] != 16'(sample(ts + 48'(i / 8), i % 8, int'(cur[1])))) bad++;
    if (bad == 0) n_good++; else n_bad++;
    t_last = $time;
    cur = {};
  endtask

  task automatic daq_loop(input int bs);
    logic [31:0] occ;
    logic [31:0] blk [$];
    bit err;
    int n;
    int idle = 0;
    while (sending || idle < 400) begin
      k7.read(32'h11, occ, err);
      if (occ == 0) begin idle++; continue; end
      idle = 0;
      n = (int'(occ) < bs) ? int'(occ) : bs;
      k7.read_block(32'h10, n, blk, err);
      if (err) $display("FAIL: block read error");
      foreach (blk[i]) begin take_word(blk[i][31:16]); take_word(blk[i][15:0]); end
    end
  endtask

  real surv [4], bw [4];

  task automatic run(input int idx, input int rate_hz, input int bs, input int ntrig);
    int period, expected, dropped;
    longint t0, t1;
    int q0, r0, l0;
    sent_ts = {}; cur = {}; n_good = 0; n_bad = 0;
    q0 = int'(l1_drop_queue); r0 = int'(l1_drop_room); l0 = int'(l1_drop_late);
    period = 125_000_000 / rate_hz;
    sending = 1;
    t0 = $time;
    fork
      begin
        for (int i = 0; i < ntrig; i++) begin
          @(negedge clk);
          ext_trig_valid = 1;
          ext_trig = '{chmask: 3'b111, ts: dut.ts_now - 48'd40};
          sent_ts.push_back(dut.ts_now - 48'd40);
          @(negedge clk) ext_trig_valid = 0;
          repeat (period - 2) @(negedge clk);
        end
        sending = 0;
      end
      daq_loop(bs);
    join
    t1 = $time;
    expected = 3 * ntrig;
    dropped  = int'(l1_drop_queue) - q0 + int'(l1_drop_room) - r0 + int'(l1_drop_late) - l0;
    surv[idx] = real'(n_good) / real'(expected);
    bw[idx]   = real'(n_good) * 2032.0 / (real'(t_last - t0) * 1.0e-9) / 1.0e6;
    $display("run %0d: %0d Hz, BS %0d: %0d of %0d packets, survival %.3f, bandwidth %.1f MB/s, dropped %0d",
             idx, rate_hz, bs, n_good, expected, surv[idx], bw[idx], dropped);
    check(n_bad == 0, $sformatf("run %0d: %0d corrupted packets", idx, n_bad));
    check(n_good + dropped == expected, $sformatf("run %0d: received + dropped = %0d of %0d",
          idx, n_good + dropped, expected));
    check(t1 > t0, "run time");
  endtask

  initial begin
    bit err;
    ts_load = 0; ts_load_value = '0; ext_trig_valid = 0; ext_trig = '0; sending = 0;
    repeat (8) @(posedge ipb_clk);
    rst = 0; ipb_rst = 0; s6_ipb_rst = 0;
    k7.write(32'h00, 32'h0e, err);    // external mode, three channels, DDR3 off
    repeat (4100) @(negedge clk);     // fill the 32 us buffers

    run(0, 1000, 2048, 3);
    run(1, 10000, 2048, 20);
    run(2, 20000, 2048, 20);
    run(3, 20000, 64, 20);

    check(surv[0] == 1.0, "no loss at the 1 kHz design rate");
    check(surv[1] == 1.0, "no loss at 10 kHz with a 2048-word buffer");
    check(bw[1] > 55.0, $sformatf("about 60 MB/s at 10 kHz (%.1f)", bw[1]));
    check(surv[2] < 1.0, "losses above the read bandwidth");
    check(bw[2] > 0.9 * bw[1] && bw[2] <= 62.5, $sformatf("bandwidth saturates at 20 kHz (%.1f)", bw[2]));
    check(bw[3] < bw[2], "a small DAQ buffer moves less data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_500_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
