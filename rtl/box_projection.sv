// box_projection: projection of one component onto the interval
// [z_min, z_max] (saturation).
//
// Two subtracters compare the incoming value t with both bounds (one adder
// delay, L_A); their signs s1 = sign(t - z_min) and s2 = sign(t - z_max)
// then drive a registered three-way multiplexer that outputs z_min, the
// delayed t, or z_max. Total delay from t to z is L_A + 1 = 2 cycles, as
// published. The bounds must be stable (or delayed alongside t) for the
// L_A cycles of the comparison; here they are sampled together with t.
// If z_min > z_max the lower bound wins (a choice of this design).
module box_projection #(
  parameter int W = 32
) (
  input  logic                clk,
  input  logic signed [W-1:0] t,
  input  logic signed [W-1:0] z_min,
  input  logic signed [W-1:0] z_max,
  output logic signed [W-1:0] z
);
  logic signed [W:0]   d_min, d_max;   // one extra bit: the comparison cannot wrap
  logic                s1, s2;
  logic signed [W-1:0] t_d, lo_d, hi_d;

  assign d_min = {t[W-1], t} - {z_min[W-1], z_min};
  assign d_max = {t[W-1], t} - {z_max[W-1], z_max};

  // Stage 1 (L_A): subtracters, and the z^-L_A delay of t and the bounds.
  always_ff @(posedge clk) begin
    s1   <= d_min[W];      // t < z_min
    s2   <= ~d_max[W] & (d_max != '0);  // t > z_max
    t_d  <= t;
    lo_d <= z_min;
    hi_d <= z_max;
  end

  // Stage 2 (+1): multiplexer selected by s1 & s2.
  always_ff @(posedge clk) begin
    unique case ({s1, s2})
      2'b10, 2'b11: z <= lo_d;
      2'b01:        z <= hi_d;
      default:      z <= t_d;
    endcase
  end
endmodule
