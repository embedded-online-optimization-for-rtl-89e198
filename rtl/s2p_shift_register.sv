// s2p_shift_register: serial-to-parallel shift register between the P lanes
// and the dot products. It accepts P serial streams, one value per lane per
// cycle, and presents the full N-element vector in parallel.
//
// Lane k computes components k, k+P, k+2P, ... (the published odd/even
// split, generalised to P lanes), so after R = ceil(N/P) shifts element
// r*P + k of the vector sits in position r of lane k's shift register. On
// the cycle that carries the last element (in_last) the completed vector is
// copied into vec, which then stays stable while the next iteration reads it
// and the shift register refills. The copy takes the in-flight element
// directly, so vec is valid in the cycle after in_last. Whether the vector
// is held in a separate register is this design's choice: the dot products
// of the next iteration overlap with the refill.
module s2p_shift_register #(
  parameter int W = 32,
  parameter int P = 1,
  parameter int N = 40
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         in_last,
  input  logic [W-1:0] in_data [P],
  output logic [W-1:0] vec [N]
);
  localparam int R = (N + P - 1) / P;

  logic [W-1:0] sr     [P][R];
  logic [W-1:0] sr_nxt [P][R];

  // Generate loops with one register per element (rather than procedural
  // loops over the arrays) keep elaboration fast at n = 216.
  for (genvar k = 0; k < P; k++) begin : g_lane
    for (genvar r = 0; r < R; r++) begin : g_pos
      if (r < R - 1) begin : g_mid
        assign sr_nxt[k][r] = sr[k][r+1];
      end else begin : g_end
        assign sr_nxt[k][r] = in_data[k];
      end
      always_ff @(posedge clk) begin
        if (in_valid) sr[k][r] <= sr_nxt[k][r];
      end
    end
  end

  for (genvar j = 0; j < N; j++) begin : g_vec
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                   vec[j] <= '0;
      else if (in_valid && in_last) vec[j] <= sr_nxt[j % P][j / P];
    end
  end
endmodule
