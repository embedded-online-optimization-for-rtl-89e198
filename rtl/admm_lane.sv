// admm_lane: one copy of the ADMM datapath. It computes the components
// k, k+P, k+2P, ... of the ADMM iterates, one per cycle, for
//     y_{i+1}  = M11 (rho z_i - nu_i) + (M12 b(x) - M11 h)
//     z_{i+1}  = proj_K(y_{i+1} + nu_i / rho)
//     nu_{i+1} = rho y_{i+1} + nu_i - rho z_{i+1}
// with rho a power of two (2^RHO_LOG2), so every rho product is a shift.
// The vector that enters the dot products is w_i = rho z_i - nu_i; the
// constant M12 b(x) - M11 h is computed once per solve.
//
// Pipeline, counted from the cycle a row is issued (l_A = l_M = 1):
//   +1          coefficient memory row read
//   +1+LG       dot product M11 row . w
//   +1          adder: y = dot + const
//   +1          adders: t = y + nu/rho and a = rho y + nu (nu from the FIFO)
//   +3          projection (box, cone or none) -> zp
//   +1          warm-start multiplexer for z -> z
//   +1          subtracter nu' = a - rho z, warm-start multiplexer for nu
//   comb.       subtracter w' = rho z - nu', to the serial-to-parallel register
// so a row issued in cycle c is captured downstream at the end of cycle
// c + LG + 9 and one iteration takes
//     L_A = ceil(n_A/P) + l_A ceil(log2 n_A) + l_M + 6 l_A + 2
// cycles, the published count.
//
// Set-up pass (init = 1): the multiplexers select the set-up matrix
// [M12_x | -M11 h] and the vector [x; 1], whose product is stored as the
// constant (folding -M11 h into an extra column is this design's choice);
// the warm-start blocks replay the shifted previous solution z_0, nu_0, and
// w_0 = rho z_0 - nu_0 is passed on while nu_0 enters the FIFO. In the last
// iteration the FIFO is no longer written, the warm-start blocks record the
// final z and nu, and z is presented on z_data.
module admm_lane #(
  parameter int W        = 32,
  parameter int FRAC     = 18,
  parameter int N        = 216,  // n_A
  parameter int NX       = 12,   // states (x enters b(x))
  parameter int P        = 1,
  parameter int LANE     = 0,
  parameter int RHO_LOG2 = 1,
  parameter int SEG0     = 40,   // length of the input part N*n_u
  parameter int SHIFT0   = 4,    // n_u
  parameter int SHIFT1   = 16,   // n_x + |S|
  parameter int R        = (N + P - 1) / P,
  parameter int RW       = $clog2(R + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cfg_we,
  input  fom_pkg::cfg_sel_e   cfg_sel,
  input  logic [15:0]         cfg_row,   // local row
  input  logic [15:0]         cfg_col,
  input  logic [W-1:0]        cfg_data,
  input  logic signed [W-1:0] w_n,
  input  logic                cold,
  input  logic                issue_valid,
  input  logic [RW-1:0]       issue_row,
  input  logic                issue_init,
  input  logic                issue_last,
  input  logic                flush,
  input  logic [W-1:0]        vec_w [N],
  input  logic [W-1:0]        vec_x [NX],
  output logic                w_valid,
  output logic                w_last_row,
  output logic [W-1:0]        w_data,
  output logic                z_valid,
  output logic                z_last_row,
  output logic [W-1:0]        z_data
);
  import fom_pkg::*;

  localparam int AW   = (R > 1) ? $clog2(R) : 1;   // local row index width
  localparam int LG   = (N > 1) ? $clog2(N) : 0;
  localparam int DPL  = L_M + L_A * LG;
  localparam int S_DP = 1 + DPL;     // dot product result
  localparam int S_Y  = S_DP + 1;    // y register
  localparam int S_T  = S_Y + 1;     // t and a registers
  localparam int S_ZP = S_T + 3;     // projection output
  localparam int S_Z  = S_ZP + 1;    // z after warm-start multiplexer
  localparam int S_NU = S_Z + 1;     // nu' after warm-start multiplexer
  localparam int NSTG = S_NU + 1;
  localparam int NI   = NX + 1;      // set-up columns: x and the constant 1

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

  // Global component index of a local row, and its place in the horizon.
  function automatic int gidx(input logic [RW-1:0] r);
    return int'(r) * P + LANE;
  endfunction
  function automatic logic first_stage(input logic [RW-1:0] r);
    int j = gidx(r);
    return (j < SEG0) ? (j < SHIFT0) : (j >= N) || (j - SEG0 < SHIFT1);
  endfunction
  function automatic logic last_stage(input logic [RW-1:0] r);
    int j = gidx(r);
    return (j < SEG0) ? (j >= SEG0 - SHIFT0) : (j >= N - SHIFT1);
  endfunction

  // ---- memories --------------------------------------------------------------
  logic [W-1:0] row_m  [N];
  logic [W-1:0] row_i  [NI];
  coef_memory #(.W(W), .ROWS(R), .COLS(N)) u_mem_m11 (
    .clk(clk), .we(cfg_we && cfg_sel == SEL_ITER_MAT), .wrow(cfg_row), .wcol(cfg_col),
    .wdata(cfg_data), .rd_en(issue_valid), .rd_row(issue_row), .rd_data(row_m));
  coef_memory #(.W(W), .ROWS(R), .COLS(NI)) u_mem_m12 (
    .clk(clk), .we(cfg_we && cfg_sel == SEL_INIT_MAT), .wrow(cfg_row), .wcol(cfg_col),
    .wdata(cfg_data), .rd_en(issue_valid), .rd_row(issue_row), .rd_data(row_i));

  logic [W-1:0] lo_m [R];
  logic [W-1:0] hi_m [R];
  comp_type_e   ty_m [R];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ty_m <= '{default: CT_FREE};
    end else if (cfg_we && cfg_sel == SEL_TYPE && int'(cfg_row) < R) begin
      ty_m[cfg_row[AW-1:0]] <= comp_type_e'(cfg_data[1:0]);
    end
  end
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_sel == SEL_LO && int'(cfg_row) < R) lo_m[cfg_row[AW-1:0]] <= cfg_data;
    if (cfg_we && cfg_sel == SEL_HI && int'(cfg_row) < R) hi_m[cfg_row[AW-1:0]] <= cfg_data;
  end

  // ---- operand multiplexers and dot product -----------------------------------
  logic signed [W-1:0] dp_a [N];
  logic signed [W-1:0] dp_b [N];
  logic signed [W-1:0] dp_sum;
  logic                dp_valid;
  for (genvar j = 0; j < N; j++) begin : g_opnd
    logic signed [W-1:0] ia, ib;   // set-up pass operands [x; 1]
    if (j < NX) begin : g_x
      assign ia = row_i[j];
      assign ib = vec_x[j];
    end else if (j == NX) begin : g_one
      assign ia = row_i[j];
      assign ib = W'(1) <<< FRAC;
    end else begin : g_zero
      assign ia = '0;
      assign ib = '0;
    end
    assign dp_a[j] = tag[1].init ? ia : row_m[j];
    assign dp_b[j] = tag[1].init ? ib : vec_w[j];
  end
  dot_product #(.W(W), .FRAC(FRAC), .N(N)) u_dot (
    .clk(clk), .rst_n(rst_n), .in_valid(tag[1].valid), .a(dp_a), .b(dp_b),
    .out_valid(dp_valid), .sum(dp_sum));

  // ---- y = dot + const ----------------------------------------------------------
  logic signed [W-1:0] cst_m [R];
  logic signed [W-1:0] y_q;
  always_ff @(posedge clk) begin
    if (tag[S_DP].valid && tag[S_DP].init) cst_m[tag[S_DP].row] <= dp_sum;
    y_q <= dp_sum + cst_m[tag[S_DP].row];
  end

  // ---- t = y + nu/rho, a = rho y + nu ----------------------------------------------
  logic         f_push, f_pop, f_empty, f_full;
  logic [W-1:0] nu_head;
  logic signed [W-1:0] nu_i, t_q, a_q, a_d [4];
  assign f_pop = tag[S_Y].valid && !tag[S_Y].init;
  assign nu_i  = f_pop ? $signed(nu_head) : '0;
  always_ff @(posedge clk) begin
    t_q <= y_q + (nu_i >>> RHO_LOG2);
    a_q <= (y_q <<< RHO_LOG2) + nu_i;
    a_d[0] <= a_q;
    a_d[1] <= a_d[0];
    a_d[2] <= a_d[1];
    a_d[3] <= a_d[2];
  end

  // ---- projection ---------------------------------------------------------------------
  logic signed [W-1:0] zp;
  admm_projection #(.W(W)) u_proj (
    .clk(clk), .valid(tag[S_T].valid), .ctype(ty_m[tag[S_T].row]), .t(t_q),
    .lo(lo_m[tag[S_T].row]), .hi(hi_m[tag[S_T].row]), .z(zp));

  // ---- warm start of z (one cycle) -------------------------------------------------
  logic signed [W-1:0] z_q, z_d, nu_new, nu_q;
  warm_start #(.W(W), .DEPTH(R)) u_ws_z (
    .clk(clk), .rst_n(rst_n), .valid(tag[S_ZP].valid), .capture(tag[S_ZP].last),
    .replay(tag[S_ZP].init), .cold(cold), .in_skip(first_stage(tag[S_ZP].row)),
    .in_pad(last_stage(tag[S_ZP].row)), .in_data(zp), .w_n(w_n), .out_data(z_q));

  // ---- nu' = a - rho z, with warm start of nu ----------------------------------------
  assign nu_new = a_d[3] - (z_q <<< RHO_LOG2);
  warm_start #(.W(W), .DEPTH(R)) u_ws_nu (
    .clk(clk), .rst_n(rst_n), .valid(tag[S_Z].valid), .capture(tag[S_Z].last),
    .replay(tag[S_Z].init), .cold(cold), .in_skip(first_stage(tag[S_Z].row)),
    .in_pad(last_stage(tag[S_Z].row)), .in_data(nu_new), .w_n('0), .out_data(nu_q));
  always_ff @(posedge clk) z_d <= z_q;

  assign f_push = tag[S_NU].valid && !tag[S_NU].last;
  iter_fifo #(.W(W), .DEPTH(R)) u_fifo (
    .clk(clk), .rst_n(rst_n), .flush(flush), .push(f_push), .din(nu_q),
    .pop(f_pop), .dout(nu_head), .empty(f_empty), .full(f_full));

  // ---- w' = rho z - nu' -----------------------------------------------------------------
  assign w_valid    = tag[S_NU].valid;
  assign w_last_row = (int'(tag[S_NU].row) == R - 1);
  assign w_data     = (z_d <<< RHO_LOG2) - nu_q;

  assign z_valid    = tag[S_Z].valid && tag[S_Z].last;
  assign z_last_row = (int'(tag[S_Z].row) == R - 1);
  assign z_data     = z_q;

  // Dot-product valid lines up with the tag pipeline; the nu FIFO never
  // runs dry or overfills.
  a_dp_align: assert property (@(posedge clk) dp_valid == tag[S_DP].valid);
  a_fifo_ok:  assert property (@(posedge clk) disable iff (flush)
    !(f_pop && f_empty) && !(f_push && !f_pop && f_full));

  // A soft-constrained state must be followed by its slack in the same lane.
  a_pair: assert property (@(posedge clk)
    (tag[S_T].valid && ty_m[tag[S_T].row] == CT_SOFT_X) |=> (tag[S_T].valid && ty_m[tag[S_T].row] == CT_SOFT_D));
endmodule
