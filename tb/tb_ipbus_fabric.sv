// tb_ipbus_fabric: address decoding between one master and three slaves.
//
// Three small register slaves (each answers reads with its index and the
// offset, and stores writes) sit behind the fabric. Checked: each access
// reaches only the selected slave, the read data of that slave comes back,
// and an address whose select field has no slave answers err.
module tb_ipbus_fabric;
  import gcu_pkg::*;

  logic ipb_clk = 1'b0;
  logic ipb_rst = 1'b1;
  always #16 ipb_clk = ~ipb_clk;

  ipb_wbus_t ipb_in;
  ipb_rbus_t ipb_out;
  ipb_wbus_t [2:0] ipb_to_slaves;
  ipb_rbus_t [2:0] ipb_from_slaves;

  ipbus_fabric #(.NSLV(3)) dut (.*);
  ipb_master_bfm m (.clk (ipb_clk), .wbus (ipb_in), .rbus (ipb_out));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // simple slaves
  logic [31:0] last_w [3];
  int          n_acc [3];
  for (genvar s = 0; s < 3; s++) begin : g_s
    logic ack;
    always @(posedge ipb_clk) begin
      ack <= ipb_to_slaves[s].strobe && !ack;
      if (ipb_to_slaves[s].strobe && !ack) begin
        n_acc[s]++;
        if (ipb_to_slaves[s].write) last_w[s] <= ipb_to_slaves[s].wdata;
      end
    end
    assign ipb_from_slaves[s] = '{rdata: 32'(s * 256) + ipb_to_slaves[s].addr[3:0], ack: ack, err: 1'b0};
  end

  initial begin
    logic [31:0] d;
    bit err;
    for (int s = 0; s < 3; s++) begin n_acc[s] = 0; last_w[s] = 0; end
    g_s[0].ack = 0; g_s[1].ack = 0; g_s[2].ack = 0;
    repeat (3) @(posedge ipb_clk);
    ipb_rst = 0;
    m.read(32'h25, d, err);
    check(!err && d == 32'h205, $sformatf("slave 2 offset 5 -> %h", d));
    m.read(32'h03, d, err);
    check(!err && d == 32'h003, "slave 0 offset 3");
    m.write(32'h11, 32'hcafe, err);
    check(!err && last_w[1] == 32'hcafe && last_w[0] == 0 && last_w[2] == 0, "write only to slave 1");
    check(n_acc[0] == 1 && n_acc[1] == 1 && n_acc[2] == 1, "one access per slave");
    m.read(32'h35, d, err);
    check(err, "unmapped select answers err");
    m.write(32'hf0, 32'h1, err);
    check(err, "unmapped write answers err");
    check(n_acc[0] == 1 && n_acc[1] == 1 && n_acc[2] == 1, "unmapped access reaches no slave");
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
