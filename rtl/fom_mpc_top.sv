// fom_mpc_top: the two first-order MPC solver architectures side by side,
// each with its own configuration port, start/done handshake and state
// input: a fast gradient method solver for input-constrained problems and
// an ADMM solver for problems that also have input-rate and soft state
// constraints. The two share no hardware and may run at the same time.
// Putting both in one top level is this design's choice; the published work
// generates either one for a given problem.
module fom_mpc_top #(
  parameter int W         = fom_pkg::DATA_W,
  // fast gradient method: N*n_u variables, n_x states
  parameter int FGM_N     = 40,
  parameter int FGM_NX    = 8,
  parameter int FGM_P     = 1,
  parameter int FGM_IMAX  = 15,
  // ADMM: horizon, inputs, states, soft states
  parameter int ADMM_HOR  = 10,
  parameter int ADMM_NU   = 4,
  parameter int ADMM_NX   = 12,
  parameter int ADMM_NS   = 4,
  parameter int ADMM_P    = 1,
  parameter int ADMM_IMAX = 40,
  parameter int ADMM_NA   = ADMM_HOR * (ADMM_NU + ADMM_NX + ADMM_NS) + ADMM_NX + ADMM_NS
) (
  input  logic             clk,
  input  logic             rst_n,
  // fast gradient method
  input  fom_pkg::cfg_wr_t fgm_cfg,
  input  logic             fgm_start,
  input  logic [W-1:0]     fgm_x   [FGM_NX],
  output logic             fgm_busy,
  output logic             fgm_done,
  output logic [W-1:0]     fgm_z   [FGM_N],
  // ADMM
  input  fom_pkg::cfg_wr_t admm_cfg,
  input  logic             admm_start,
  input  logic             admm_warm,
  input  logic [W-1:0]     admm_x  [ADMM_NX],
  output logic             admm_busy,
  output logic             admm_done,
  output logic [W-1:0]     admm_z  [ADMM_NA]
);
  fgm_solver #(.W(W), .FRAC(fom_pkg::FGM_FRAC), .N(FGM_N), .NX(FGM_NX), .P(FGM_P),
               .IMAX(FGM_IMAX)) u_fgm (
    .clk(clk), .rst_n(rst_n), .cfg(fgm_cfg), .start(fgm_start), .x_in(fgm_x),
    .busy(fgm_busy), .done(fgm_done), .z_out(fgm_z));

  admm_solver #(.W(W), .FRAC(fom_pkg::ADMM_FRAC), .HOR(ADMM_HOR), .NU(ADMM_NU), .NX(ADMM_NX),
                .NS(ADMM_NS), .P(ADMM_P), .IMAX(ADMM_IMAX), .NA(ADMM_NA)) u_admm (
    .clk(clk), .rst_n(rst_n), .cfg(admm_cfg), .start(admm_start), .warm(admm_warm),
    .x_in(admm_x), .busy(admm_busy), .done(admm_done), .z_out(admm_z));
endmodule
