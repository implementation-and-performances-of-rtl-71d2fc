// async_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Write and read sides run on unrelated clocks. Each side keeps a binary
// pointer one bit wider than the address and passes its Gray-coded copy to
// the other side through a two-flop synchroniser, so full, free, empty and
// count are conservative: a side may see the other's progress two to three
// of its own clocks late, never early.
//
// Interface: wr_en writes wr_data when wr_full is low (a write on full is
// ignored). rd_en with rd_empty low pops one entry; rd_data shows it in the
// next read clock (registered read, block-RAM style). wr_free and rd_count
// give the free and used entries as seen by each side.
module async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned AW    = 11      // 2^AW entries
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wr_full,
  output logic [AW:0]      wr_free,

  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_empty,
  output logic [AW:0]      rd_count
);

  localparam int unsigned DEPTH = 1 << AW;

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wp_bin, wp_gray, rp_bin, rp_gray;
  logic [AW:0] rp_gray_s1, rp_gray_s2, wp_gray_s1, wp_gray_s2;
  logic [AW:0] rp_bin_w, wp_bin_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write side ----------------
  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wp_bin     <= '0;
      wp_gray    <= '0;
      rp_gray_s1 <= '0;
      rp_gray_s2 <= '0;
    end else begin
      rp_gray_s1 <= rp_gray;
      rp_gray_s2 <= rp_gray_s1;
      if (wr_en && !wr_full) begin
        wp_bin  <= wp_bin + 1'b1;
        wp_gray <= bin2gray(wp_bin + 1'b1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wp_bin[AW-1:0]] <= wr_data;
  end

  assign rp_bin_w = gray2bin(rp_gray_s2);
  assign wr_full  = (wp_bin[AW] != rp_bin_w[AW]) && (wp_bin[AW-1:0] == rp_bin_w[AW-1:0]);
  assign wr_free  = (AW+1)'(DEPTH) - (wp_bin - rp_bin_w);

  // ---------------- read side ----------------
  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rp_bin     <= '0;
      rp_gray    <= '0;
      wp_gray_s1 <= '0;
      wp_gray_s2 <= '0;
      rd_data    <= '0;
    end else begin
      wp_gray_s1 <= wp_gray;
      wp_gray_s2 <= wp_gray_s1;
      if (rd_en && !rd_empty) begin
        rd_data <= mem[rp_bin[AW-1:0]];
        rp_bin  <= rp_bin + 1'b1;
        rp_gray <= bin2gray(rp_bin + 1'b1);
      end
    end
  end

  assign wp_bin_r = gray2bin(wp_gray_s2);
  assign rd_empty = (wp_bin_r == rp_bin);
  assign rd_count = wp_bin_r - rp_bin;

endmodule
