// ddr3_model: behavioural model of a DDR3 memory behind its controller's
// user port, for testbenches.
//
// Accepts one command per clock while app_rdy is high (app_rdy and
// app_wdf_rdy drop at random when BUSY_PCT > 0). A write stores app_wdf_data
// at app_addr; a read returns the stored line LAT clocks later, in order,
// with app_rd_data_valid. Only lines that were written take memory (sparse
// storage), so a 2 GB address space costs nothing. Unwritten lines read as 0.
module ddr3_model #(
  parameter int unsigned AW       = 27,
  parameter int unsigned LAT      = 12,
  parameter int unsigned BUSY_PCT = 20
) (
  input  logic           clk,
  input  logic           app_en,
  input  logic           app_cmd,
  input  logic [AW-1:0]  app_addr,
  output logic           app_rdy,
  input  logic [127:0]   app_wdf_data,
  input  logic           app_wdf_wren,
  output logic           app_wdf_rdy,
  output logic [127:0]   app_rd_data,
  output logic           app_rd_data_valid
);

  logic [127:0] mem [logic [AW-1:0]];
  logic [127:0] pipe_d [LAT];
  logic         pipe_v [LAT];
  int           n_wr = 0, n_rd = 0;

  initial begin
    app_rdy = 1'b1; app_wdf_rdy = 1'b1; app_rd_data = '0; app_rd_data_valid = 1'b0;
    for (int i = 0; i < int'(LAT); i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  always @(posedge clk) begin
    // command
    for (int i = int'(LAT) - 1; i > 0; i--) begin
      pipe_v[i] = pipe_v[i-1];
      pipe_d[i] = pipe_d[i-1];
    end
    pipe_v[0] = 1'b0;
    if (app_en && app_rdy) begin
      if (!app_cmd) begin
        if (!(app_wdf_wren && app_wdf_rdy)) $display("FAIL: ddr3_model write command without data");
        mem[app_addr] = app_wdf_data;
        n_wr++;
      end else begin
        pipe_v[0] = 1'b1;
        pipe_d[0] = mem.exists(app_addr) ? mem[app_addr] : '0;
        n_rd++;
      end
    end
    app_rd_data_valid <= pipe_v[LAT-1];
    app_rd_data       <= pipe_d[LAT-1];
    app_rdy           <= ($urandom_range(0, 99) >= BUSY_PCT);
    app_wdf_rdy       <= ($urandom_range(0, 99) >= BUSY_PCT / 2);
  end

  function automatic logic [127:0] peek(input logic [AW-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

endmodule
