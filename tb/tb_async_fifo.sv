// tb_async_fifo: ordering, full/empty and counts across two clocks.
//
// A 16-entry FIFO (AW = 4) is written on an 8 ns clock and read on a 26 ns
// clock. Phase 1 fills it with reads stopped: it must report full after
// exactly 16 writes and ignore a 17th. Phase 2 reads all back and checks
// order and the empty flag. Phase 3 streams 2000 random words with random
// enables on both sides against a queue model.
module tb_async_fifo;

  localparam int AW = 4;
  localparam int W  = 32;

  logic wr_clk = 1'b0, rd_clk = 1'b0;
  logic wr_rst = 1'b1, rd_rst = 1'b1;
  always #4  wr_clk = ~wr_clk;
  always #13 rd_clk = ~rd_clk;

  logic          wr_en, wr_full, rd_en, rd_empty;
  logic [W-1:0]  wr_data, rd_data;
  logic [AW:0]   wr_free, rd_count;

  async_fifo #(.WIDTH(W), .AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] model [$];
  int n_wr, n_rd;
  bit streaming;
  bit rd_pending;

  // Both sides decide at the falling edge, when the flags are stable, what
  // the coming rising edge will do.
  bit wr_fire;
  always @(negedge wr_clk) begin
    if (streaming) begin
      wr_en   = (n_wr < 2000) && ($urandom_range(0, 1) == 1);
      wr_data = $urandom;
    end
    wr_fire = streaming && wr_en && !wr_full;
  end
  always @(posedge wr_clk) if (wr_fire) begin
    model.push_back(wr_data);
    n_wr++;
  end

  always @(negedge rd_clk) begin
    if (streaming) rd_en = ($urandom_range(0, 2) != 0);
    rd_pending = streaming && rd_en && !rd_empty;
  end
  always @(posedge rd_clk) if (rd_pending) begin
    #1;
    check(model.size() > 0 && rd_data == model[0], "stream order");
    if (model.size() > 0) void'(model.pop_front());
    n_rd++;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0; n_wr = 0; n_rd = 0; streaming = 0; rd_pending = 0; wr_fire = 0;
    repeat (3) @(posedge rd_clk);
    wr_rst = 0; rd_rst = 0;
    repeat (2) @(posedge rd_clk);
    check(rd_empty && wr_free == 16, "empty after reset");
    // phase 1: fill
    for (int i = 0; i < 17; i++) begin
      @(negedge wr_clk);
      check(wr_full == (i >= 16), $sformatf("full flag at %0d", i));
      wr_en = 1; wr_data = 32'hA000_0000 + i;
    end
    @(negedge wr_clk) wr_en = 0;
    check(wr_free == 0, "no free entry when full");
    repeat (4) @(posedge rd_clk);
    check(rd_count == 16, $sformatf("read side count %0d", rd_count));
    // phase 2: drain
    for (int i = 0; i < 16; i++) begin
      @(negedge rd_clk) rd_en = 1;
      @(posedge rd_clk) #1;
      check(rd_data == 32'hA000_0000 + i, $sformatf("drain word %0d = %h", i, rd_data));
    end
    @(negedge rd_clk) rd_en = 0;
    check(rd_empty, "empty after drain");
    repeat (4) @(posedge wr_clk);
    #1 check(wr_free == 16, "write side sees it empty");
    // phase 3: random streaming
    streaming = 1;
    wait (n_rd == 2000);
    streaming = 0;
    check(model.size() == 0, "all words read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge rd_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
