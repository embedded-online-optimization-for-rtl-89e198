// fgm_lane: one copy of the fast gradient datapath (the circuit that is
// replicated P times). It computes the components k, k+P, k+2P, ... of the
// iterates, one component per cycle, for Algorithm "constant step scheme II":
//     t_i     = (I - H_n) y_i - Phi_n x
//     z_{i+1} = proj_K(t_i)                      (box projection)
//     y_{i+1} = (1 + beta) z_{i+1} - beta z_i
//
// Pipeline, counted from the cycle a row is issued (l_A = l_M = 1):
//   +1           row of the coefficient memory is read
//   +1+LG+1      dot product v^T w (multipliers, tree of depth LG)
//   +1           subtracter: t = dot - Phi_n x   (Phi_n x read from memory)
//   +2           box projection -> z
//   +1           multipliers (1+beta) z and beta z
//   comb.        subtracter y = (1+beta) z - beta z_i (beta z_i from the FIFO),
//                presented on y_data for the serial-to-parallel register
// so y of a row issued in cycle c is captured downstream at the end of cycle
// c + LG + 6, giving L_F = ceil(n/P) + LG + 6 cycles per iteration, the
// published count with l_A = l_M = 1.
//
// Set-up pass (init = 1): the multiplexers select Phi_n and x, the dot
// product result is stored as Phi_n x, the projection input is forced to 0
// so that z_0 = proj_K(0) (a cold start inside the feasible set, this
// design's choice), beta z_0 enters the FIFO and y_0 = z_0 is passed on.
// In the last iteration (last = 1) the FIFO is no longer written and z is
// also presented on z_data as the solution.
module fgm_lane #(
  parameter int W    = 32,
  parameter int FRAC = 16,
  parameter int N    = 40,   // decision variables N*n_u
  parameter int NX   = 8,    // states
  parameter int P    = 1,    // number of lanes
  parameter int R    = (N + P - 1) / P,
  parameter int RW   = $clog2(R + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration writes already decoded to this lane
  input  logic                cfg_we,
  input  fom_pkg::cfg_sel_e   cfg_sel,
  input  logic [15:0]         cfg_row,   // local row
  input  logic [15:0]         cfg_col,
  input  logic [W-1:0]        cfg_data,
  input  logic signed [W-1:0] beta,
  input  logic signed [W-1:0] one_plus_beta,
  // row issue
  input  logic                issue_valid,
  input  logic [RW-1:0]       issue_row,
  input  logic                issue_init,
  input  logic                issue_last,
  input  logic                flush,
  input  logic [W-1:0]        vec_y [N],
  input  logic [W-1:0]        vec_x [NX],
  // outputs
  output logic                y_valid,
  output logic                y_last_row,
  output logic [W-1:0]        y_data,
  output logic                z_valid,
  output logic                z_last_row,
  output logic [W-1:0]        z_data
);
  import fom_pkg::*;

  localparam int AW    = (R > 1) ? $clog2(R) : 1;   // local row index width
  localparam int LG    = (N > 1) ? $clog2(N) : 0;
  localparam int DPL   = L_M + L_A * LG;
  localparam int S_DP  = 1 + DPL;          // dot product result
  localparam int S_T   = S_DP + 1;         // t register
  localparam int S_Z   = S_T + 2;          // projection output
  localparam int S_P   = S_Z + 1;          // beta products
  localparam int NSTG  = S_P + 1;

  typedef struct packed {
    logic          valid;
    logic          init;
    logic          last;
    logic [RW-1:0] row;
  } tag_t;

  tag_t tag [NSTG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 1; s < NSTG; s++) tag[s] <= '0;
    end else begin
      for (int s = 1; s < NSTG; s++) tag[s] <= tag[s-1];
    end
  end
  assign tag[0] = '{valid: issue_valid, init: issue_init, last: issue_last, row: issue_row};

  // ---- coefficient memories: I - H_n and Phi_n --------------------------
  logic [W-1:0] row_h   [N];
  logic [W-1:0] row_phi [NX];

  coef_memory #(.W(W), .ROWS(R), .COLS(N)) u_mem_h (
    .clk(clk), .we(cfg_we && cfg_sel == SEL_ITER_MAT), .wrow(cfg_row), .wcol(cfg_col),
    .wdata(cfg_data), .rd_en(issue_valid), .rd_row(issue_row), .rd_data(row_h));
  coef_memory #(.W(W), .ROWS(R), .COLS(NX)) u_mem_phi (
    .clk(clk), .we(cfg_we && cfg_sel == SEL_INIT_MAT), .wrow(cfg_row), .wcol(cfg_col),
    .wdata(cfg_data), .rd_en(issue_valid), .rd_row(issue_row), .rd_data(row_phi));

  // Box bounds z_min, z_max of this lane's components.
  logic [W-1:0] zmin_m [R];
  logic [W-1:0] zmax_m [R];
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == SEL_LO && int'(cfg_row) < R) zmin_m[cfg_row[AW-1:0]] <= cfg_data;
    if (cfg_we && cfg_sel == SEL_HI && int'(cfg_row) < R) zmax_m[cfg_row[AW-1:0]] <= cfg_data;
  end

  // ---- operand multiplexers and dot product ------------------------------
  logic signed [W-1:0] dp_a [N];
  logic signed [W-1:0] dp_b [N];
  logic signed [W-1:0] dp_sum;
  logic                dp_valid;

  for (genvar j = 0; j < N; j++) begin : g_opnd
    logic signed [W-1:0] ia, ib;   // set-up pass operands
    if (j < NX) begin : g_x
      assign ia = row_phi[j];
      assign ib = vec_x[j];
    end else begin : g_zero
      assign ia = '0;
      assign ib = '0;
    end
    assign dp_a[j] = tag[1].init ? ia : row_h[j];
    assign dp_b[j] = tag[1].init ? ib : vec_y[j];
  end

  dot_product #(.W(W), .FRAC(FRAC), .N(N)) u_dot (
    .clk(clk), .rst_n(rst_n), .in_valid(tag[1].valid), .a(dp_a), .b(dp_b),
    .out_valid(dp_valid), .sum(dp_sum));

  // ---- t = dot - Phi_n x -------------------------------------------------
  logic signed [W-1:0] phix_m [R];
  logic signed [W-1:0] t_q;
  always_ff @(posedge clk) begin
    if (tag[S_DP].valid && tag[S_DP].init) phix_m[tag[S_DP].row] <= dp_sum;
    t_q <= tag[S_DP].init ? '0 : dp_sum - phix_m[tag[S_DP].row];
  end

  // ---- projection onto the box -------------------------------------------
  logic signed [W-1:0] z_q;
  box_projection #(.W(W)) u_proj (
    .clk(clk), .t(t_q), .z_min(zmin_m[tag[S_T].row]), .z_max(zmax_m[tag[S_T].row]), .z(z_q));

  // ---- beta products, FIFO and y ----------------------------------------
  logic signed [W-1:0] p1_q, p2_q, z_d;
  fx_mul #(.W(W), .FRAC(FRAC)) u_mul1 (.clk(clk), .a(one_plus_beta), .b(z_q), .p(p1_q));
  fx_mul #(.W(W), .FRAC(FRAC)) u_mul2 (.clk(clk), .a(beta),          .b(z_q), .p(p2_q));
  always_ff @(posedge clk) z_d <= z_q;

  logic         f_push, f_pop, f_empty, f_full;
  logic [W-1:0] f_head;
  assign f_push = tag[S_P].valid && !tag[S_P].last;
  assign f_pop  = tag[S_P].valid && !tag[S_P].init;

  iter_fifo #(.W(W), .DEPTH(R)) u_fifo (
    .clk(clk), .rst_n(rst_n), .flush(flush), .push(f_push), .din(p2_q),
    .pop(f_pop), .dout(f_head), .empty(f_empty), .full(f_full));

  // The dot-product valid flag must line up with the tag pipeline, and
  // the iterate FIFO never runs dry or overfills.
  a_dp_align: assert property (@(posedge clk) dp_valid == tag[S_DP].valid);
  a_fifo_ok:  assert property (@(posedge clk) disable iff (flush)
    !(f_pop && f_empty) && !(f_push && !f_pop && f_full));

  assign y_valid    = tag[S_P].valid;
  assign y_last_row = (int'(tag[S_P].row) == R - 1);
  assign y_data     = tag[S_P].init ? z_d : p1_q - $signed(f_head);

  assign z_valid    = tag[S_Z].valid && tag[S_Z].last;
  assign z_last_row = (int'(tag[S_Z].row) == R - 1);
  assign z_data     = z_q;
endmodule
