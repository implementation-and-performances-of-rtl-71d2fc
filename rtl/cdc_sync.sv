// cdc_sync: two-flop synchroniser for quasi-static settings.
//
// Re-times a bus written in another clock domain into clk. It is meant for
// settings that stay constant while they are used (thresholds, enables, the
// trigger mode): while such a bus changes, the bits may arrive one clock apart.
// Output follows the input two clock edges later.
module cdc_sync #(
  parameter int unsigned WIDTH = 1
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  logic [WIDTH-1:0] s1;

  always_ff @(posedge clk) begin
    s1 <= d;
    q  <= s1;
  end

endmodule
