// tb_gcu_top: end-to-end test of one GCU at full size (no parameter
// overrides: 32 us L1 buffers, 2^13-byte funnel FIFO, 2 GB DDR3 address
// space, 1000-sample windows).
//
// The testbench plays the FADCs, the back-end card (timestamp load and
// validated triggers), the IPbus masters of both FPGAs (bus functional
// models), the DDR3 memory (sparse behavioural model), the MAC-address
// EEPROM and a JTAG target on the Kintex-7 pins. Every FADC sample is a known
// function of timestamp, sample index and channel, plus pulses the testbench
// injects at chosen lines, so every waveform read back is checked sample by
// sample.
//
// Scenario: load the timestamp; check settings registers and an unmapped
// address; a pulse under the reset threshold gives no trigger; lower the
// thresholds; external mode: a pulse on two channels gives a trigger request,
// a validated trigger reads out three channels, read over IPbus; a disabled
// channel is skipped; self-triggering mode: a pulse is read out without a
// validated trigger; six pulses overflow the funnel FIFO (four packets kept);
// a stale validated trigger and a burst of triggers are dropped; the DDR3
// recording is read out over IPbus while new pulses arrive (recording
// blocked), then recording restarts. In parallel the Spartan-6 side writes
// and reads the EEPROM over I2C and shifts a JTAG vector.
//
// Each mechanism is counted when it is observed; a mechanism never observed
// is a failure.
module tb_gcu_top;
  import gcu_pkg::*;

  logic clk = 1'b0, ipb_clk = 1'b0, s6_ipb_clk = 1'b0;
  logic rst = 1'b1, ipb_rst = 1'b1, s6_ipb_rst = 1'b1;
  always #4  clk = ~clk;            // 125 MHz
  always #16 ipb_clk = ~ipb_clk;    // 31.25 MHz
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
  ipb_master_bfm s6 (.clk (s6_ipb_clk), .wbus (s6_ipb_in), .rbus (s6_ipb_out));
  ddr3_model #(.AW(27), .LAT(12), .BUSY_PCT(20)) mem (.clk, .*);
  i2c_eeprom_model #(.DEV(7'h50), .STRETCH(20)) ee (.clk (s6_ipb_clk), .scl_oe, .sda_oe, .scl_i, .sda_i);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // mechanisms observed
  int m_ts_load, m_settings, m_fabric_err, m_threshold, m_trig_req, m_ext_readout,
      m_ch_enable, m_self_trig, m_occupancy, m_drop_room, m_drop_late, m_drop_queue,
      m_ddr3_write, m_ddr3_block, m_ddr3_readout, m_ddr3_restart, m_i2c, m_jtag;

  // ------------------------------------------------------------------
  // FADC model
  // ------------------------------------------------------------------
  typedef struct { int ch; logic [47:0] t0; } pulse_t;
  pulse_t pulses [$];
  localparam int PULSE_LINES = 16;
  localparam int PULSE_AMP   = 5000;

  function automatic logic [13:0] sample(input logic [47:0] ts, input int k, input int ch);
    int v;
    v = 200 + int'(((ts * 8 + 48'(k)) * 13 + 48'(ch) * 77) % 1000);
    foreach (pulses[i])
      if (pulses[i].ch == ch && ts >= pulses[i].t0 && ts < pulses[i].t0 + PULSE_LINES) v += PULSE_AMP;
    return 14'(v);
  endfunction

  always_comb
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < SAMPLES_PER_CLK; k++) adc[c][k] = sample(dut.ts_now, k, c);

  // schedule a pulse `lead` lines from now on the channels of mask; returns its line
  task automatic pulse(input logic [2:0] mask, input int lead, output logic [47:0] t0);
    t0 = dut.ts_now + 48'(lead);
    for (int c = 0; c < NCH; c++) if (mask[c]) pulses.push_back('{c, t0});
  endtask

  // trigger requests to the back end
  trig_t req_log [$];
  always @(posedge clk) if (!rst && trig_req_valid) req_log.push_back(trig_req);

  // JTAG target on the Kintex-7 pins: 64-bit shift register
  logic [63:0] jsr = 64'hfeed_0000_c0de_1234;
  always @(posedge jtag_tck) jsr <= {jtag_tdi, jsr[63:1]};
  always @(negedge jtag_tck) jtag_tdo <= jsr[0];

  // ------------------------------------------------------------------
  // helpers
  // ------------------------------------------------------------------
  function automatic logic [31:0] A(input int sel, input int off);
    return 32'(sel * 16 + off);
  endfunction

  task automatic k7w(input int sel, input int off, input logic [31:0] d);
    bit err;
    k7.write(A(sel, off), d, err);
    check(!err, $sformatf("write %h", A(sel, off)));
  endtask

  task automatic k7r(input int sel, input int off, output logic [31:0] d);
    bit err;
    k7.read(A(sel, off), d, err);
    check(!err, $sformatf("read %h", A(sel, off)));
  endtask

  task automatic wait_clk(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic send_ext(input logic [2:0] mask, input logic [47:0] ts);
    @(negedge clk);
    ext_trig_valid = 1; ext_trig = '{chmask: mask, ts: ts};
    @(negedge clk);
    ext_trig_valid = 0;
  endtask

  // Checks one packet of 1016 16-bit words; returns its channel and timestamp.
  task automatic check_packet(input logic [15:0] p [$], input string src,
                              output int ch, output logic [47:0] ts, output bit ok);
    int bad = 0;
    ok = 0; ch = -1; ts = '0;
    if (p.size() != PKT_WORDS) begin check(0, $sformatf("%s: size %0d", src, p.size())); return; end
    ch = int'(p[1]); ts = {p[5], p[6], p[7]};
    check(p[0] == 16'h805a && p[1] < 3 && p[2] == 16'd127 && p[4] == 16'h0022,
          $sformatf("%s: header %h %h %h %h", src, p[0], p[1], p[2], p[4]));
    if (ch >= 3) return;
    for (int i = 0; i < WAVE_SAMPLES; i++)
      if (p[8 + i] != 16'(sample(ts + 48'(i / 8), i % 8, ch))) bad++;
    check(bad == 0, $sformatf("%s: %0d wrong samples (ch %0d ts %h)", src, bad, ch, ts));
    check(p[1008] == 16'h55aa && p[1009] == 16'h0123 && p[1012] == 16'hcdef &&
          p[1013] == 16'hff00 && p[1014] == 16'h0abc && p[1015] == 16'h0869,
          $sformatf("%s: trailer", src));
    ok = (bad == 0);
  endtask

  // Reads n packets from the funnel FIFO; returns (ch, ts) of each.
  int          got_ch [$];
  logic [47:0] got_ts [$];
  task automatic read_daq(input int n);
    logic [31:0] d;
    logic [15:0] p [$];
    int ch; logic [47:0] ts; bit ok;
    got_ch = {}; got_ts = {};
    for (int k = 0; k < n; k++) begin
      p = {};
      for (int i = 0; i < PKT_WORDS / 2; i++) begin
        k7r(1, 0, d);
        p.push_back(d[31:16]); p.push_back(d[15:0]);
      end
      check_packet(p, "L1", ch, ts, ok);
      got_ch.push_back(ch); got_ts.push_back(ts);
    end
  endtask

  task automatic occupancy(output logic [31:0] d);
    k7r(1, 1, d);
  endtask

  // ------------------------------------------------------------------
  // Spartan-6 side, in parallel
  // ------------------------------------------------------------------
  task automatic i2c_cmd(input logic [31:0] c, input logic [7:0] b, output logic [31:0] st);
    bit err;
    s6.write(32'h00, c | {16'h0, b, 8'h0}, err);
    check(!err, "I2C command accepted");
    do s6.read(32'h01, st, err); while (st[0]);
  endtask

  task automatic s6_tests();
    logic [31:0] st, d;
    bit err, acks;
    // EEPROM: write 0x5e at offset 0x10, read it back (random read)
    acks = 1;
    i2c_cmd(32'h5, 8'ha0, st); acks &= !st[1];
    i2c_cmd(32'h4, 8'h10, st); acks &= !st[1];
    i2c_cmd(32'h6, 8'h5e, st); acks &= !st[1];
    i2c_cmd(32'h5, 8'ha0, st); acks &= !st[1];
    i2c_cmd(32'h4, 8'h10, st); acks &= !st[1];
    i2c_cmd(32'h5, 8'ha1, st); acks &= !st[1];
    i2c_cmd(32'h1a, 8'h00, st);
    check(acks, "EEPROM acknowledged");
    check(ee.mem[8'h10] == 8'h5e, "EEPROM byte written");
    check(st[15:8] == 8'h5e, $sformatf("EEPROM byte read back %h", st[15:8]));
    if (acks && st[15:8] == 8'h5e && ee.n_stretch > 0) m_i2c++;
    // JTAG: shift 32 bits
    s6.write(32'h11, 32'h0000_0001, err);
    s6.write(32'h12, 32'ha5a5_0f0f, err);
    s6.write(32'h10, 32'h8000_001f, err);
    do s6.read(32'h10, d, err); while (d[0]);
    s6.read(32'h13, d, err);
    check(d == 32'hc0de_1234, $sformatf("JTAG TDO %h", d));
    check(jsr[63:32] == 32'ha5a5_0f0f, "JTAG TDI shifted");
    if (d == 32'hc0de_1234 && jsr[63:32] == 32'ha5a5_0f0f) m_jtag++;
    // unmapped select on the Spartan-6 fabric
    s6.read(32'h70, d, err);
    check(err, "S6 unmapped address answers err");
    if (err) m_fabric_err++;
  endtask

  // ------------------------------------------------------------------
  // main scenario
  // ------------------------------------------------------------------
  logic [47:0] t0, t1;
  initial begin
    logic [31:0] d, occ;
    bit err;
    int n_l1, nreq, n_ddr_pk, n_wr0;
    ts_load = 0; ts_load_value = '0; ext_trig_valid = 0; ext_trig = '0; jtag_tdo = 0;
    m_ts_load = 0; m_settings = 0; m_fabric_err = 0; m_threshold = 0; m_trig_req = 0;
    m_ext_readout = 0; m_ch_enable = 0; m_self_trig = 0; m_occupancy = 0; m_drop_room = 0;
    m_drop_late = 0; m_drop_queue = 0; m_ddr3_write = 0; m_ddr3_block = 0;
    m_ddr3_readout = 0; m_ddr3_restart = 0; m_i2c = 0; m_jtag = 0;
    repeat (8) @(posedge ipb_clk);
    rst = 0; ipb_rst = 0; s6_ipb_rst = 0;
    ee.n_start = 0; ee.n_stop = 0;

    fork s6_tests(); join_none

    // timestamp from the synchronous link
    @(negedge clk) begin ts_load = 1; ts_load_value = 48'h0012_3400_0000; end
    @(negedge clk) ts_load = 0;
    wait_clk(4);
    k7r(0, 7, d);
    k7r(0, 6, occ);
    check(d == 32'h12 && occ >= 32'h3400_0000 && occ < 32'h3400_1000,
          $sformatf("timestamp read back %h %h", d, occ));
    if (d == 32'h12 && occ >= 32'h3400_0000) m_ts_load++;

    // settings
    k7r(0, 5, d);
    check(d == 32'h0022, "firmware version");
    k7r(0, 0, d);
    check(d == 32'h1e, "CTRL reset value: external mode, channels and DDR3 on");
    k7w(0, 4, 32'h0abc);
    k7r(0, 4, d);
    check(d == 32'h0abc, "GCU ID written");
    if (d == 32'h0abc) m_settings++;
    k7.read(32'h30, d, err);
    check(err, "K7 unmapped address answers err");
    if (err) m_fabric_err++;

    // fill the 32 us buffers once
    wait_clk(4100);

    // a pulse below the reset threshold (8192) triggers nothing
    nreq = req_log.size();
    pulse(3'b001, 20, t0);
    wait_clk(200);
    check(req_log.size() == nreq, "no trigger under the reset threshold");
    for (int c = 1; c <= 3; c++) k7w(0, c, 32'd4000);
    k7r(0, 2, d);
    check(d == 32'd4000, "threshold written");
    wait_clk(10);
    pulse(3'b001, 20, t0);
    wait_clk(200);
    check(req_log.size() == nreq + 1, "trigger above the new threshold");
    if (req_log.size() == nreq + 1) m_threshold++;

    // external mode: pulse on channels 0 and 2, validated trigger for all three
    nreq = req_log.size();
    pulse(3'b101, 20, t0);
    wait_clk(120);
    check(req_log.size() == nreq + 1 && req_log[nreq].chmask == 3'b101 && req_log[nreq].ts == t0,
          "trigger request for channels 0 and 2 at the pulse line");
    if (req_log.size() == nreq + 1 && req_log[nreq].ts == t0) m_trig_req++;
    check(l1_pkt_count == 0, "external mode ignores local triggers");
    send_ext(3'b111, t0);
    wait_clk(3 * PKT_WORDS + 100);
    occupancy(occ);
    check(occ == 3 * PKT_WORDS / 2, $sformatf("occupancy %0d", occ));
    if (occ == 3 * PKT_WORDS / 2) m_occupancy++;
    read_daq(3);
    check(got_ch.size() == 3 && got_ch[0] == 0 && got_ch[1] == 1 && got_ch[2] == 2 &&
          got_ts[0] == t0 && got_ts[2] == t0, "three packets in channel order at the trigger time");
    if (got_ch.size() == 3 && got_ts[0] == t0 && got_ts[1] == t0 && l1_pkt_count == 3) m_ext_readout++;

    // channel 1 disabled
    k7w(0, 0, 32'h1a);
    wait_clk(10);
    send_ext(3'b111, dut.ts_now - 40);
    wait_clk(3 * PKT_WORDS + 100);
    occupancy(occ);
    check(occ == PKT_WORDS, $sformatf("two packets with channel 1 off, occupancy %0d", occ));
    read_daq(2);
    check(got_ch.size() == 2 && got_ch[0] == 0 && got_ch[1] == 2, "channels 0 and 2 only");
    if (occ == PKT_WORDS && got_ch[1] == 2) m_ch_enable++;

    // self-triggering mode
    k7w(0, 0, 32'h1f);
    wait_clk(10);
    n_l1 = int'(l1_pkt_count);
    pulse(3'b010, 20, t1);
    wait_clk(PKT_WORDS + 200);
    check(int'(l1_pkt_count) == n_l1 + 1, "self-triggered packet");
    read_daq(1);
    check(got_ch[0] == 1 && got_ts[0] == t1, "self-triggered packet of channel 1 at the pulse");
    if (got_ch[0] == 1 && got_ts[0] == t1) m_self_trig++;

    // six pulses, one every 1100 lines, nothing read: four fit in 2^13 bytes
    n_l1 = int'(l1_pkt_count);
    for (int i = 0; i < 6; i++) begin
      pulse(3'b001, 20, t1);
      wait_clk(1100);
    end
    wait_clk(1100);
    occupancy(occ);
    check(occ == 4 * PKT_WORDS / 2, $sformatf("funnel FIFO holds four packets, occupancy %0d", occ));
    check(l1_drop_room == 2, $sformatf("two packets dropped for room, %0d", l1_drop_room));
    if (l1_drop_room > 0 && occ == 4 * PKT_WORDS / 2) m_drop_room++;
    read_daq(4);

    // external mode: stale validated trigger, then a burst
    k7w(0, 0, 32'h1e);
    wait_clk(10);
    send_ext(3'b001, dut.ts_now - 3990);
    wait_clk(20);
    check(l1_drop_late == 1, "stale trigger dropped");
    if (l1_drop_late == 1) m_drop_late++;
    n_l1 = int'(l1_pkt_count);
    for (int i = 0; i < 8; i++) send_ext(3'b111, dut.ts_now - 30);
    wait_clk(100);
    check(l1_drop_queue > 0, $sformatf("burst overflows the trigger queue (%0d)", l1_drop_queue));
    if (l1_drop_queue > 0) m_drop_queue++;
    wait_clk(8 * PKT_WORDS);
    occupancy(occ);
    read_daq(int'(occ) / (PKT_WORDS / 2));
    check(int'(occ) == (int'(l1_pkt_count) - n_l1) * PKT_WORDS / 2, "every packet counted was delivered");

    // ---------------- DDR3 ----------------
    wait_clk(PKT_WORDS * 2);
    n_ddr_pk = int'(ddr3_pkt_count);
    check(n_ddr_pk > 0 && mem.n_wr == int'(ddr3_lines_used) && int'(ddr3_lines_used) == n_ddr_pk * PKT_WORDS / 8,
          $sformatf("DDR3: %0d packets, %0d lines written, %0d used", n_ddr_pk, mem.n_wr, ddr3_lines_used));
    if (n_ddr_pk > 0 && mem.n_wr == int'(ddr3_lines_used)) m_ddr3_write++;
    ddr3_readout(n_ddr_pk);

    // recording restarts
    n_wr0 = mem.n_wr;
    pulse(3'b100, 20, t1);
    wait_clk(PKT_WORDS + 300);
    check(mem.n_wr == n_wr0 + PKT_WORDS / 8, "recording restarted after the readout");
    if (mem.n_wr == n_wr0 + PKT_WORDS / 8) m_ddr3_restart++;

    // Spartan-6 side done?
    wait (m_jtag + m_i2c >= 2 || $time > 64'd20_000_000);

    check(m_ts_load > 0, "mechanism: timestamp load");
    check(m_settings > 0, "mechanism: settings registers");
    check(m_fabric_err == 2, "mechanism: unmapped address err on both fabrics");
    check(m_threshold > 0, "mechanism: programmable threshold");
    check(m_trig_req > 0, "mechanism: trigger request to the back end");
    check(m_ext_readout > 0, "mechanism: validated trigger readout over IPbus");
    check(m_occupancy > 0, "mechanism: FIFO occupancy register");
    check(m_ch_enable > 0, "mechanism: channel enable");
    check(m_self_trig > 0, "mechanism: self-triggering mode");
    check(m_drop_room > 0, "mechanism: funnel FIFO full drop");
    check(m_drop_late > 0, "mechanism: stale trigger drop");
    check(m_drop_queue > 0, "mechanism: trigger queue overflow");
    check(m_ddr3_write > 0, "mechanism: DDR3 recording");
    check(m_ddr3_block > 0, "mechanism: recording blocked during readout");
    check(m_ddr3_readout > 0, "mechanism: DDR3 readout over IPbus");
    check(m_ddr3_restart > 0, "mechanism: recording restart");
    check(m_i2c > 0, "mechanism: I2C EEPROM access");
    check(m_jtag > 0, "mechanism: virtual JTAG shift");
    $display("mechanisms: ts_load %0d settings %0d fabric_err %0d threshold %0d trig_req %0d ext_readout %0d",
             m_ts_load, m_settings, m_fabric_err, m_threshold, m_trig_req, m_ext_readout);
    $display("  occupancy %0d ch_enable %0d self_trig %0d drop_room %0d drop_late %0d drop_queue %0d",
             m_occupancy, m_ch_enable, m_self_trig, m_drop_room, m_drop_late, m_drop_queue);
    $display("  ddr3_write %0d ddr3_block %0d ddr3_readout %0d ddr3_restart %0d i2c %0d jtag %0d",
             m_ddr3_write, m_ddr3_block, m_ddr3_readout, m_ddr3_restart, m_i2c, m_jtag);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DDR3 readout: request, read while busy or data remains, parse packets.
  // A pulse arrives during the readout: its packet must be dropped.
  task automatic ddr3_readout(input int n_pk);
    logic [31:0] st, d;
    logic [15:0] p [$];
    int words, n_ok, n_bad, ch, n_wr0, drop0;
    logic [47:0] ts, tb;
    bit ok, pulsed;
    n_wr0 = mem.n_wr; drop0 = int'(ddr3_drop_room);
    k7w(2, 0, 32'h1);
    // the request crosses into the system clock; wait until busy shows
    for (int i = 0; i < 20; i++) begin k7r(2, 1, st); if (st[0]) break; end
    check(st[0], "DDR3 readout busy after the request");
    p = {}; words = 0; n_ok = 0; n_bad = 0; pulsed = 0;
    do begin
      k7r(2, 1, st);
      for (int i = 0; i < int'(st[31:8]); i++) begin
        k7r(2, 2, d);
        words++;
        p.push_back(d[15:0]); p.push_back(d[31:16]);
        if (p.size() == PKT_WORDS) begin
          check_packet(p, "DDR3", ch, ts, ok);
          if (ok) n_ok++; else n_bad++;
          p = {};
        end
      end
      if (!pulsed && words > 1000) begin
        pulse(3'b001, 5, tb);
        pulsed = 1;
      end
    end while (st[0] || st[31:8] != 0);
    check(words == n_pk * PKT_WORDS / 2, $sformatf("DDR3 words read %0d", words));
    check(n_ok == n_pk && n_bad == 0, $sformatf("DDR3 packets good %0d bad %0d", n_ok, n_bad));
    if (n_ok == n_pk && n_pk > 0) m_ddr3_readout++;
    check(mem.n_wr == n_wr0 && int'(ddr3_drop_room) == drop0 + 1,
          $sformatf("recording blocked during readout (writes %0d, drops %0d)",
                    mem.n_wr - n_wr0, int'(ddr3_drop_room) - drop0));
    if (pulsed && mem.n_wr == n_wr0 && int'(ddr3_drop_room) > drop0) m_ddr3_block++;
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
