// fx_mul: one registered fixed-point multiplier (l_M = 1 cycle).
//
// p = (a * b) >>> FRAC, computed at double width and truncated to W bits
// (two's-complement truncation, so the rounding error lies in (-2^-FRAC, 0]).
// The product appears on p one clock after a and b are presented.
module fx_mul #(
  parameter int W    = 32,
  parameter int FRAC = 16
) (
  input  logic                clk,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] p
);
  logic signed [2*W-1:0] full;
  assign full = a * b;
  always_ff @(posedge clk) p <= W'(full >>> FRAC);
endmodule
