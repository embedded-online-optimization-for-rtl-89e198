// cone_projection: projection of a soft-constrained state and its slack,
// (x, delta), onto the truncated two-dimensional cone
//     { (x, delta) : |x - c| <= r + delta, delta >= 0 }.
//
// The pair arrives in sequence, x first and delta in the next cycle, and
// leaves in sequence, each component 2*L_A + 1 = 3 cycles after it entered.
// The published structure is followed: two subtracters form s1 = x - (c+r)
// and s2 = (c-r) - x while x is present; when delta arrives, four adders
// form s3 = s1 - delta, s4 = delta - s2, s5 = s2 + delta and s6 = s1 + delta.
// The stream itself is delayed by 2*L_A and combined with s3/2 and s4/2
// (a wire shift) to give the edge projections
//     o1 = delta + s3/2,  o3 = x - s3/2   (edge x - c = r + delta)
//     o2 = delta - s4/2,  o4 = x - s4/2   (edge c - x = r + delta)
// and a registered multiplexer picks o1..o4, the unchanged input (o5), 0,
// c+r or c-r. The selection rule is worked out here from the geometry:
//     upper edge     s3 > 0 and s6 >= 0      -> (o3, o1)
//     lower edge     s4 < 0 and s5 >= 0      -> (o4, o2)
//     vertex (c+r,0) s1 >= 0 and s6 < 0
//     vertex (c-r,0) s2 >= 0 and s5 < 0
//     below the base delta < 0 (|x-c| < r)  -> (x, 0)
//     inside                                -> (x, delta)
// The sign of delta is used besides s1..s6 to tell the region below the
// base from the inside of the cone (this design's choice).
// s1..s6 are one bit wider than the data so that the comparisons never wrap.
// c+r and c-r are sampled together with x.
module cone_projection #(
  parameter int W = 32
) (
  input  logic                clk,
  input  logic                in_valid,
  input  logic                in_is_x,    // 1: x slot, 0: delta slot of a pair
  input  logic signed [W-1:0] t,          // incoming x or delta
  input  logic signed [W-1:0] c_plus_r,
  input  logic signed [W-1:0] c_minus_r,
  output logic signed [W-1:0] z           // projected x or delta, 3 cycles later
);
  logic signed [W:0]   s1, s2, s3, s4, s5, s6;
  logic                s1_ge0, s2_ge0;     // signs of s1, s2 held for the pair's output
  logic                dneg;
  logic signed [W-1:0] cpr_q, cmr_q, cpr_q2, cmr_q2;
  logic signed [W-1:0] d1, d2;            // z^-2L_A delay of the stream
  logic                x1, x2;            // slot flag alongside the stream
  logic signed [W:0]   tw;

  assign tw = {t[W-1], t};

  always_ff @(posedge clk) begin
    // x slot: s1, s2 and the constraint data.
    if (in_valid && in_is_x) begin
      s1    <= tw - {c_plus_r[W-1], c_plus_r};
      s2    <= {c_minus_r[W-1], c_minus_r} - tw;
      cpr_q <= c_plus_r;
      cmr_q <= c_minus_r;
    end
    // delta slot: s3..s6, held for both output slots of the pair.
    if (in_valid && !in_is_x) begin
      s3     <= s1 - tw;
      s4     <= tw - s2;
      s5     <= s2 + tw;
      s6     <= s1 + tw;
      dneg   <= t[W-1];
      s1_ge0 <= !s1[W];
      s2_ge0 <= !s2[W];
      cpr_q2 <= cpr_q;
      cmr_q2 <= cmr_q;
    end
    d1 <= t;
    d2 <= d1;
    x1 <= in_is_x;
    x2 <= x1;
  end

  // Output stage: o1..o5 and the multiplexer.
  logic signed [W-1:0] h3, h4;
  logic signed [W-1:0] o1, o2, o3, o4, o5;
  logic                up_edge, lo_edge, up_vtx, lo_vtx, below;

  assign h3 = W'(s3 >>> 1);
  assign h4 = W'(s4 >>> 1);
  assign o1 = d2 + h3;
  assign o3 = d2 - h3;
  assign o2 = d2 - h4;
  assign o4 = d2 - h4;
  assign o5 = d2;

  assign up_edge = (s3 > 0)  && (s6 >= 0);
  assign lo_edge = (s4 < 0)  && (s5 >= 0);
  assign up_vtx  = s1_ge0 && (s6 < 0);
  assign lo_vtx  = s2_ge0 && (s5 < 0);
  assign below   = dneg;

  always_ff @(posedge clk) begin
    if (up_edge)      z <= x2 ? o3 : o1;
    else if (lo_edge) z <= x2 ? o4 : o2;
    else if (up_vtx)  z <= x2 ? cpr_q2 : '0;
    else if (lo_vtx)  z <= x2 ? cmr_q2 : '0;
    else if (below)   z <= x2 ? o5 : '0;
    else              z <= o5;
  end
endmodule
