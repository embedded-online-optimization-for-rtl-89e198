// admm_solver: fixed-point ADMM for MPC with input, input-rate (hard state)
// and soft state constraints, with P parallel lanes. It shares the structure
// of the fast gradient architecture: dense matrix memories, dot products, a
// serial-to-parallel register and iterate FIFOs, and adds warm starting of
// z and nu and the cone projection for soft constraints.
//
// Operation. The host loads M11 (SEL_ITER_MAT), the set-up matrix
// [M12_x | -M11 h] with n_x + 1 columns (SEL_INIT_MAT), per component the
// type (SEL_TYPE: free, box, soft state, slack) and bounds (SEL_LO / SEL_HI,
// c - r and c + r for a soft state), and the warm-start padding w_N
// (SEL_SCALAR col 2). All scaling (rho, the 1/sigma scaling of the slack
// matching conditions, the ordering of the decision vector) is done offline
// in this data. A start pulse with the state x begins a solve: one set-up
// pass, then IMAX iterations, each of exactly
//     L_A = ceil(n_A/P) + l_A*ceil(log2 n_A) + l_M + 6 l_A + 2
// cycles (233 for n_A = 216, P = 1). With warm = 1 the solve starts from the
// previous solution shifted by one horizon stage; with warm = 0 from zero.
// done pulses with z_{IMAX} on z_out.
//
// Defaults are the benchmark's state-constrained problem: N = 10, n_u = 4,
// n_x = 12, |S| = 4, n_A = 216, 18 fraction bits, 40 iterations, rho = 2,
// P = 1. Soft pairs must be ordered so that each state is followed, in its
// lane, by its slack (for P = 1: in the next position).
module admm_solver #(
  parameter int W        = fom_pkg::DATA_W,
  parameter int FRAC     = fom_pkg::ADMM_FRAC,
  parameter int HOR      = 10,  // horizon N
  parameter int NU       = 4,
  parameter int NX       = 12,
  parameter int NS       = 4,   // soft-constrained states |S|
  parameter int P        = 1,
  parameter int IMAX     = 40,
  parameter int RHO_LOG2 = 1,
  parameter int NA       = HOR * (NU + NX + NS) + NX + NS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  fom_pkg::cfg_wr_t cfg,
  input  logic             start,
  input  logic             warm,
  input  logic [W-1:0]     x_in  [NX],
  output logic             busy,
  output logic             done,
  output logic [W-1:0]     z_out [NA]
);
  import fom_pkg::*;

  localparam int R   = (NA + P - 1) / P;
  localparam int RW  = $clog2(R + 1);
  localparam int LG  = (NA > 1) ? $clog2(NA) : 0;
  localparam int LA  = R + L_A * LG + L_M + 6 * L_A + 2;
  localparam int CW  = $clog2(LA + 1);
  localparam int IW  = $clog2(IMAX + 2);

  // The warm-start shift must stay inside each lane.
  if ((NU % P) != 0 || ((NX + NS) % P) != 0) begin : g_bad_p
    $error("admm_solver: P must divide n_u and n_x + |S|");
  end

  logic signed [W-1:0] wn_q;
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == SEL_SCALAR && cfg.col == 16'd2) wn_q <= cfg.data[W-1:0];
  end

  // ---- pass sequencer ------------------------------------------------------
  logic [IW-1:0] pass_q;
  logic [CW-1:0] cyc_q;
  logic [W-1:0]  x_q [NX];
  logic          run_q, cold_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q  <= 1'b0;
      pass_q <= '0;
      cyc_q  <= '0;
      done   <= 1'b0;
      cold_q <= 1'b1;
    end else begin
      done <= 1'b0;
      if (!run_q) begin
        if (start) begin
          run_q  <= 1'b1;
          pass_q <= '0;
          cyc_q  <= '0;
          cold_q <= !warm;
        end
      end else if (cyc_q == CW'(LA - 1)) begin
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
  logic [W-1:0] vec_w [NA];
  logic         w_valid [P], w_last [P], z_valid [P], z_last [P];
  logic [W-1:0] w_data [P], z_data [P];

  for (genvar k = 0; k < P; k++) begin : g_lane
    logic lane_we;
    assign lane_we = cfg.we && (int'(cfg.row) % P == k);
    admm_lane #(.W(W), .FRAC(FRAC), .N(NA), .NX(NX), .P(P), .LANE(k), .RHO_LOG2(RHO_LOG2),
                .SEG0(HOR * NU), .SHIFT0(NU), .SHIFT1(NX + NS)) u_lane (
      .clk(clk), .rst_n(rst_n),
      .cfg_we(lane_we), .cfg_sel(cfg.sel), .cfg_row(16'(int'(cfg.row) / P)),
      .cfg_col(cfg.col), .cfg_data(cfg.data[W-1:0]), .w_n(wn_q), .cold(cold_q),
      .issue_valid(issue_valid), .issue_row(issue_row), .issue_init(issue_init),
      .issue_last(issue_last), .flush(flush), .vec_w(vec_w), .vec_x(x_q),
      .w_valid(w_valid[k]), .w_last_row(w_last[k]), .w_data(w_data[k]),
      .z_valid(z_valid[k]), .z_last_row(z_last[k]), .z_data(z_data[k]));
  end

  s2p_shift_register #(.W(W), .P(P), .N(NA)) u_s2p_w (
    .clk(clk), .rst_n(rst_n), .in_valid(w_valid[0]), .in_last(w_last[0]),
    .in_data(w_data), .vec(vec_w));

  s2p_shift_register #(.W(W), .P(P), .N(NA)) u_s2p_z (
    .clk(clk), .rst_n(rst_n), .in_valid(z_valid[0]), .in_last(z_last[0]),
    .in_data(z_data), .vec(z_out));
endmodule
