// tb_i2c_ipbus: I2C master commands over IPbus against an EEPROM model.
//
// The EEPROM model stretches the clock after every byte it receives. The
// testbench writes a 6-byte MAC address at memory offset 0xfa with one
// START/address/data.../STOP sequence, then reads it back with a random read
// (START, device+W, offset, repeated START, device+R, six reads with the
// last one NACKed, STOP). Checked: the bytes stored and returned, ACK from
// the EEPROM, NACK for a wrong device address, the SCL rate (about 100 kHz
// with the default divider), clock stretching seen, err for a command while
// busy and for writing STATUS.
module tb_i2c_ipbus;
  import gcu_pkg::*;

  logic ipb_clk = 1'b0;
  logic ipb_rst = 1'b1;
  always #16 ipb_clk = ~ipb_clk;   // 31.25 MHz

  ipb_wbus_t ipb_in;
  ipb_rbus_t ipb_out;
  logic scl_oe, scl_i, sda_oe, sda_i;

  i2c_ipbus dut (.*);
  ipb_master_bfm m (.clk (ipb_clk), .wbus (ipb_in), .rbus (ipb_out));
  i2c_eeprom_model #(.DEV(7'h50), .STRETCH(40)) ee (.clk (ipb_clk), .*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam logic [31:0] START = 1, STOP = 2, WR = 4, RD = 8, NACK = 16;

  task automatic cmd(input logic [31:0] c, input logic [7:0] b, output logic [31:0] st);
    bit err;
    m.write(32'h0, c | {16'h0, b, 8'h0}, err);
    if (err) $display("FAIL: command refused");
    do m.read(32'h1, st, err); while (st[0]);
  endtask

  // SCL period, measured between rising edges while the bus is active
  longint last_rise = 0, min_per = 1000000, max_per = 0;
  always @(posedge scl_i) begin
    if (last_rise != 0 && $time - last_rise < 200000) begin
      if ($time - last_rise < min_per) min_per = $time - last_rise;
      if ($time - last_rise > max_per) max_per = $time - last_rise;
    end
    last_rise = $time;
  end

  initial begin
    logic [31:0] st, d;
    logic [7:0] mac [6] = '{8'h00, 8'h1e, 8'hc0, 8'h12, 8'h34, 8'h56};
    bit err, all_ack;
    repeat (3) @(posedge ipb_clk);
    ipb_rst = 0;
    repeat (2) @(posedge ipb_clk);
    check(scl_i && sda_i, "bus idle high");
    ee.n_start = 0; ee.n_stop = 0;   // ignore edges from before reset

    // write MAC at 0xfa
    all_ack = 1;
    cmd(START | WR, 8'ha0, st); all_ack &= !st[1];
    cmd(WR, 8'hfa, st);         all_ack &= !st[1];
    for (int i = 0; i < 6; i++) begin
      cmd(WR | (i == 5 ? STOP : 0), mac[i], st); all_ack &= !st[1];
    end
    check(all_ack, "EEPROM acknowledged every written byte");
    check(ee.n_wr == 6, $sformatf("6 bytes stored, got %0d", ee.n_wr));
    for (int i = 0; i < 6; i++)
      check(ee.mem[8'hfa + i] == mac[i], $sformatf("EEPROM byte %0d", i));
    check(ee.n_stop == 1, "STOP seen");
    check(ee.n_stretch >= 8, "clock stretched");

    // random read
    cmd(START | WR, 8'ha0, st);
    cmd(WR, 8'hfa, st);
    cmd(START | WR, 8'ha1, st);
    check(!st[1], "device+R acknowledged");
    for (int i = 0; i < 6; i++) begin
      cmd(RD | (i == 5 ? (STOP | NACK) : 0), 8'h0, st);
      check(st[15:8] == mac[i], $sformatf("read byte %0d = %h", i, st[15:8]));
    end
    check(ee.n_start == 3 && ee.n_stop == 2, $sformatf("starts %0d stops %0d", ee.n_start, ee.n_stop));

    // wrong device address
    cmd(START | WR | STOP, 8'ha6, st);
    check(st[1], "wrong device address NACKed");

    // SCL rate: 4 quarters of 78 clocks of 32 ns ~ 10 us
    check(min_per >= 4 * 78 * 32 && min_per <= 4 * 79 * 32, $sformatf("SCL period %0d ns", min_per));

    // busy and read-only errors
    m.write(32'h0, START | WR | STOP | 32'ha000, err);
    m.write(32'h0, START | WR | STOP | 32'ha000, err);
    check(err, "command while busy answers err");
    do m.read(32'h1, d, err); while (d[0]);
    m.write(32'h1, 32'h0, err);
    check(err, "STATUS is read only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge ipb_clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
