// dot_product: the v^T w block of the solvers, an array of N parallel
// multipliers followed by a pipelined adder reduction tree.
//
// Every cycle a new pair of N-element vectors may enter; their inner product
// leaves LATENCY = L_M + L_A * ceil(log2 N) cycles later (one register after
// the multipliers, one per tree level). Products are truncated to FRAC
// fraction bits; the tree adds in W-bit wrap-around arithmetic, so the sum is
// the same whatever the tree shape. The structure (N multipliers, tree of
// depth ceil(log2 N)) is the published one; padding the tree to a power of
// two with zero leaves is this implementation's choice.
module dot_product #(
  parameter int W    = 32,
  parameter int FRAC = 16,
  parameter int N    = 40
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] a [N],
  input  logic signed [W-1:0] b [N],
  output logic                out_valid,
  output logic signed [W-1:0] sum
);
  localparam int LG      = (N > 1) ? $clog2(N) : 0;
  localparam int NP      = 1 << LG;
  localparam int LATENCY = fom_pkg::L_M + fom_pkg::L_A * LG;

  logic signed [W-1:0] prod [N];
  logic signed [W-1:0] leaf [NP];
  logic signed [W-1:0] node [1:NP-1];   // heap order: node k adds 2k and 2k+1
  logic [LATENCY-1:0]  vpipe;

  // Multiplier array.
  for (genvar j = 0; j < N; j++) begin : g_mul
    fx_mul #(.W(W), .FRAC(FRAC)) u_mul (.clk(clk), .a(a[j]), .b(b[j]), .p(prod[j]));
  end

  // Leaves of the tree: the products, padded with zeros to a power of two.
  for (genvar j = 0; j < NP; j++) begin : g_leaf
    if (j < N) begin : g_p
      assign leaf[j] = prod[j];
    end else begin : g_z
      assign leaf[j] = '0;
    end
  end

  // Adder tree: every node is one registered adder, so all leaves reach the
  // root (node 1) after LG cycles.
  for (genvar k = 1; k < NP; k++) begin : g_node
    if (2 * k >= NP) begin : g_bottom
      always_ff @(posedge clk) node[k] <= leaf[2*k-NP] + leaf[2*k+1-NP];
    end else begin : g_inner
      always_ff @(posedge clk) node[k] <= node[2*k] + node[2*k+1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= LATENCY'({vpipe, in_valid});
  end

  if (LG > 0) begin : g_sum
    assign sum = node[1];
  end else begin : g_sum1
    assign sum = leaf[0];
  end
  assign out_valid = vpipe[LATENCY-1];
endmodule
