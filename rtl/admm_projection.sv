// admm_projection: projection of one ADMM component onto its constraint set,
// chosen per component by its type: free (no change), box [lo, hi] (input
// constraints and hard state constraints), or a soft-constrained state and
// its slack, which arrive as consecutive components and go through the cone
// projection (lo = c - r, hi = c + r on the state's slot).
//
// All three paths are aligned to the cone projection's delay of
// 2*L_A + 1 = 3 cycles: the box projection (L_A + 1 = 2 cycles) is followed
// by one extra register and the free path is a 3-stage delay. The type is
// delayed alongside and drives the output multiplexer. Merging the three
// projections into one unit is this design's choice.
module admm_projection #(
  parameter int W = 32
) (
  input  logic                clk,
  input  logic                valid,
  input  fom_pkg::comp_type_e ctype,
  input  logic signed [W-1:0] t,
  input  logic signed [W-1:0] lo,
  input  logic signed [W-1:0] hi,
  output logic signed [W-1:0] z
);
  import fom_pkg::*;

  logic signed [W-1:0] z_box, z_box_d, z_cone, f1, f2, f3;
  comp_type_e          ty1, ty2, ty3;

  box_projection #(.W(W)) u_box (.clk(clk), .t(t), .z_min(lo), .z_max(hi), .z(z_box));

  cone_projection #(.W(W)) u_cone (
    .clk(clk), .in_valid(valid && (ctype == CT_SOFT_X || ctype == CT_SOFT_D)),
    .in_is_x(ctype == CT_SOFT_X), .t(t), .c_plus_r(hi), .c_minus_r(lo), .z(z_cone));

  always_ff @(posedge clk) begin
    z_box_d <= z_box;
    f1  <= t;  f2  <= f1;  f3  <= f2;
    ty1 <= ctype; ty2 <= ty1; ty3 <= ty2;
  end

  always_comb begin
    unique case (ty3)
      CT_BOX:             z = z_box_d;
      CT_SOFT_X, CT_SOFT_D: z = z_cone;
      default:            z = f3;
    endcase
  end
endmodule
