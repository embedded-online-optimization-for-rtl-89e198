// fgm_solver: fixed-point fast gradient method for input-constrained MPC,
// the complete published compute architecture with P parallel lanes.
//
// Operation. The host first loads the offline data through cfg:
// I - H_n (SEL_ITER_MAT), Phi_n (SEL_INIT_MAT), the input bounds z_min and
// z_max (SEL_LO / SEL_HI) and the scalars beta (SEL_SCALAR col 0) and
// 1 + beta (col 1). A start pulse with the measured state x begins a solve:
// one set-up pass computes Phi_n x and z_0 = y_0 = proj_K(0), then IMAX
// iterations of the fast gradient method follow. Each pass takes exactly
//     L_F = ceil(n/P) + l_A*ceil(log2 n) + 2 l_M + 3 l_A + 1
// cycles (with l_A = l_M = 1: 52 cycles for n = 40, P = 1), so a solve takes
// (IMAX + 1) * L_F cycles from start to done; the published sample times
// count the IMAX iterations only. done pulses for one cycle with the final
// iterate z_{IMAX} (n = N n_u values, the first n_u being the control input
// to apply) on z_out; z_out holds until the next solve ends.
//
// The lanes compute every P-th component; a serial-to-parallel register
// collects the new y and hands the full vector to all lanes' dot products
// for the next iteration. Pass timing is fixed by a cycle counter: there is
// no convergence test, as in the published design. Parameter defaults are
// the benchmark's input-constrained problem (N = 10, n_u = 4, n_x = 8,
// 16 fraction bits, 15 iterations, P = 1).
module fgm_solver #(
  parameter int W    = fom_pkg::DATA_W,
  parameter int FRAC = fom_pkg::FGM_FRAC,
  parameter int N    = 40,   // N * n_u
  parameter int NX   = 8,
  parameter int P    = 1,
  parameter int IMAX = 15
) (
  input  logic             clk,
  input  logic             rst_n,
  input  fom_pkg::cfg_wr_t cfg,
  input  logic             start,
  input  logic [W-1:0]     x_in  [NX],
  output logic             busy,
  output logic             done,
  output logic [W-1:0]     z_out [N]
);
  import fom_pkg::*;

  localparam int R   = (N + P - 1) / P;
  localparam int RW  = $clog2(R + 1);
  localparam int LG  = (N > 1) ? $clog2(N) : 0;
  localparam int LF  = R + L_A * LG + 2 * L_M + 3 * L_A + 1;
  localparam int CW  = $clog2(LF + 1);
  localparam int IW  = $clog2(IMAX + 2);

  // ---- scalars --------------------------------------------------------------
  logic signed [W-1:0] beta_q, opb_q;
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == SEL_SCALAR && cfg.col == 16'd0) beta_q <= cfg.data[W-1:0];
    if (cfg.we && cfg.sel == SEL_SCALAR && cfg.col == 16'd1) opb_q  <= cfg.data[W-1:0];
  end

  // ---- pass sequencer ------------------------------------------------------
  logic [IW-1:0] pass_q;   // 0 = set-up pass, 1..IMAX = iterations
  logic [CW-1:0] cyc_q;
  logic [W-1:0]  x_q [NX];
  logic          run_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q  <= 1'b0;
      pass_q <= '0;
      cyc_q  <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run_q) begin
        if (start) begin
          run_q  <= 1'b1;
          pass_q <= '0;
          cyc_q  <= '0;
        end
      end else if (cyc_q == CW'(LF - 1)) begin
        cyc_q <= '0;
        if (pass_q == IW'(IMAX)) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end else begin
          pass_q <= pass_q + 1'b1;
        end
      end else begin
        cyc_q <= cyc_q + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!run_q && start) x_q <= x_in;
  end

  assign busy = run_q;

  logic          issue_valid, issue_init, issue_last, flush;
  logic [RW-1:0] issue_row;
  assign issue_valid = run_q && (int'(cyc_q) < R);
  assign issue_row   = RW'(cyc_q);
  assign issue_init  = (pass_q == '0);
  assign issue_last  = (pass_q == IW'(IMAX));
  assign flush       = !run_q && start;

  // ---- lanes ---------------------------------------------------------------
  logic [W-1:0] vec_y [N];
  logic         y_valid [P], y_last [P], z_valid [P], z_last [P];
  logic [W-1:0] y_data [P], z_data [P];

  for (genvar k = 0; k < P; k++) begin : g_lane
    logic lane_we;
    assign lane_we = cfg.we && (int'(cfg.row) % P == k);
    fgm_lane #(.W(W), .FRAC(FRAC), .N(N), .NX(NX), .P(P)) u_lane (
      .clk(clk), .rst_n(rst_n),
      .cfg_we(lane_we), .cfg_sel(cfg.sel), .cfg_row(16'(int'(cfg.row) / P)),
      .cfg_col(cfg.col), .cfg_data(cfg.data[W-1:0]),
      .beta(beta_q), .one_plus_beta(opb_q),
      .issue_valid(issue_valid), .issue_row(issue_row), .issue_init(issue_init),
      .issue_last(issue_last), .flush(flush), .vec_y(vec_y), .vec_x(x_q),
      .y_valid(y_valid[k]), .y_last_row(y_last[k]), .y_data(y_data[k]),
      .z_valid(z_valid[k]), .z_last_row(z_last[k]), .z_data(z_data[k]));
  end

  // y_{i+1}: P serial streams -> parallel vector for the next iteration.
  s2p_shift_register #(.W(W), .P(P), .N(N)) u_s2p_y (
    .clk(clk), .rst_n(rst_n), .in_valid(y_valid[0]), .in_last(y_last[0]),
    .in_data(y_data), .vec(vec_y));

  // Final iterate collected for the output.
  s2p_shift_register #(.W(W), .P(P), .N(N)) u_s2p_z (
    .clk(clk), .rst_n(rst_n), .in_valid(z_valid[0]), .in_last(z_last[0]),
    .in_data(z_data), .vec(z_out));
endmodule
