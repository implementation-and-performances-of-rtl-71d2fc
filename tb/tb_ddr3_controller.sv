// tb_ddr3_controller: circular DDR3 buffer, blocking readout, restart.
//
// A small memory (32 lines of 128 bits) and a 16-line readout FIFO keep the
// test short. The memory is the ddr3_model with random busy cycles; the
// readout FIFO is modelled by a queue that the testbench drains slowly.
// Checked: packing of eight 16-bit words per line (first word in bits 15:0)
// at consecutive addresses; free space reported in words; that a readout
// request waits for the packet in progress, reports busy and no room, then
// returns every stored line in order, never overfilling the FIFO; that
// writing restarts only after the FIFO is empty; and that addresses wrap
// around the end of the memory.
module tb_ddr3_controller;
  import gcu_pkg::*;

  localparam int LAW = 5, FAW = 4;
  localparam int LINES = 1 << LAW;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #4 clk = ~clk;

  logic                 in_valid, in_ready, in_sop, in_eop;
  logic [15:0]          in_data;
  logic [31:0]          room_words, lines_used;
  logic                 rd_req_toggle, busy, fifo_wr_en;
  logic [127:0]         fifo_wr_data;
  logic [FAW:0]         fifo_wr_free;
  logic                 app_en, app_cmd, app_rdy, app_wdf_wren, app_wdf_rdy, app_rd_data_valid;
  logic [LAW-1:0]       app_addr;
  logic [127:0]         app_wdf_data, app_rd_data;

  ddr3_controller #(.LINE_AW(LAW), .FIFO_AW(FAW)) dut (.*);
  ddr3_model #(.AW(LAW), .LAT(9), .BUSY_PCT(20)) mem (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // readout FIFO model
  logic [127:0] fifo [$];
  bit           drain;
  int           overflow = 0;
  assign fifo_wr_free = (FAW+1)'(16 - fifo.size());
  always @(posedge clk) begin
    if (fifo_wr_en) begin
      if (fifo.size() >= 16) overflow++;
      fifo.push_back(fifo_wr_data);
    end
  end

  // everything written, in order, and what came back
  logic [15:0]  stream [$];
  logic [127:0] got [$];
  always @(negedge clk) if (drain && fifo.size() > 0 && $urandom_range(0, 3) == 0)
    got.push_back(fifo.pop_front());

  int pkt_no = 0;
  task automatic push_words(input int n, input bit sop, input bit eop);
    for (int i = 0; i < n; i++) begin
      logic [15:0] w;
      w = 16'($urandom);
      @(negedge clk);
      in_valid = 1; in_data = w; in_sop = sop && i == 0; in_eop = eop && i == n - 1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      stream.push_back(w);
    end
    @(negedge clk);
    in_valid = 0; in_sop = 0; in_eop = 0;
  endtask

  task automatic push_packet();
    push_words(24, 1, 1);
  endtask

  function automatic logic [127:0] exp_line(input int n);
    logic [127:0] l;
    for (int k = 0; k < 8; k++) l[k*16 +: 16] = stream[n*8 + k];
    return l;
  endfunction

  task automatic readout(input int first_line, input int nlines);
    int t;
    got = {};
    drain = 1;
    t = 0;
    while (got.size() < nlines && t < 20000) begin @(negedge clk); t++; end
    check(got.size() == nlines, $sformatf("read %0d of %0d lines", got.size(), nlines));
    for (int i = 0; i < nlines && i < got.size(); i++)
      check(got[i] == exp_line(first_line + i), $sformatf("readout line %0d", i));
    repeat (10) @(negedge clk);
    check(!busy, "writing restarts after the FIFO is empty");
    check(room_words == LINES * 8, $sformatf("room after readout %0d", room_words));
    drain = 0;
  endtask

  initial begin
    in_valid = 0; in_sop = 0; in_eop = 0; in_data = 0; rd_req_toggle = 0; drain = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    @(negedge clk);
    check(room_words == LINES * 8, "room after reset");

    // four packets: 12 lines at addresses 0..11
    repeat (4) push_packet();
    repeat (20) @(negedge clk);
    check(lines_used == 12, $sformatf("lines used %0d", lines_used));
    check(room_words == (LINES - 12) * 8, $sformatf("room %0d", room_words));
    for (int n = 0; n < 12; n++)
      check(mem.peek(LAW'(n)) == exp_line(n), $sformatf("memory line %0d", n));

    // a readout request in the middle of a packet
    push_words(10, 1, 0);
    @(negedge clk) rd_req_toggle = ~rd_req_toggle;
    repeat (6) @(negedge clk);
    check(busy, "busy after request");
    check(room_words == 0, "no room while reading out");
    check(mem.n_rd == 0, "no read before the packet ends");
    push_words(14, 0, 1);
    repeat (200) @(negedge clk);
    check(busy, "stays busy while the FIFO holds data");
    readout(0, 15);
    check(overflow == 0, "FIFO never overfilled");

    // wrap around the end of the memory: 10 packets = 30 lines from line 15
    repeat (10) push_packet();
    repeat (20) @(negedge clk);
    check(lines_used == 30, $sformatf("lines used after wrap %0d", lines_used));
    check(room_words == (LINES - 30) * 8, "room near full");
    check(mem.peek(LAW'(0)) == exp_line(15 + 17), "line 17 of the run wrapped to address 0");
    @(negedge clk) rd_req_toggle = ~rd_req_toggle;
    readout(15, 30);
    check(overflow == 0, "FIFO never overfilled (2)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
