// fom_pkg: types, constants and the fixed-point helper shared by the
// first-order MPC solvers (fast gradient method and ADMM).
//
// All datapath values are two's-complement fixed-point words with FRAC
// fraction bits. Additions and subtractions wrap modulo 2^W; products are
// formed at double width, shifted right by FRAC (truncation toward minus
// infinity, as the error analysis of the solvers assumes) and cut back to W
// bits. Because modular addition is associative, the result of the adder
// tree does not depend on its shape, which lets a testbench reproduce any
// datapath value bit for bit.
//
// Every adder and multiplier in the solvers is one register stage deep
// (l_A = l_M = 1). With these delays the per-iteration cycle count of the
// fast gradient datapath reproduces the published sample times exactly.
package fom_pkg;

  // Delay of one adder/subtracter and of one multiplier, in cycles.
  localparam int L_A = 1;
  localparam int L_M = 1;

  // Default word length and fraction bits. The fraction bits are the ones
  // chosen for the benchmark (16 for the fast gradient method, 18 for ADMM);
  // the 32-bit word (integer part) is a design choice.
  localparam int DATA_W    = 32;
  localparam int FGM_FRAC  = 16;
  localparam int ADMM_FRAC = 18;

  // Which constraint a component of the ADMM decision vector carries.
  // A soft-constrained state (SOFT_X) must be immediately followed, in its
  // lane's stream, by its slack variable (SOFT_D).
  typedef enum logic [1:0] {
    CT_FREE   = 2'd0,
    CT_BOX    = 2'd1,
    CT_SOFT_X = 2'd2,
    CT_SOFT_D = 2'd3
  } comp_type_e;

  // Target of a configuration write.
  typedef enum logic [2:0] {
    SEL_ITER_MAT = 3'd0,  // iteration matrix: I - H_n (FGM) or M11 (ADMM)
    SEL_INIT_MAT = 3'd1,  // set-up matrix: Phi_n (FGM) or [M12_x | -M11 h] (ADMM)
    SEL_LO       = 3'd2,  // lower bound z_min, or c - r for a soft state
    SEL_HI       = 3'd3,  // upper bound z_max, or c + r for a soft state
    SEL_TYPE     = 3'd4,  // ADMM component type (comp_type_e)
    SEL_SCALAR   = 3'd5   // scalars: col 0 = beta, col 1 = 1+beta, col 2 = w_N
  } cfg_sel_e;

  // One configuration write: host loads the offline-computed problem data.
  typedef struct packed {
    logic        we;
    cfg_sel_e    sel;
    logic [15:0] row;   // global component (row) index
    logic [15:0] col;   // column index for matrices, scalar index for SEL_SCALAR
    logic [63:0] data;  // low DATA_W bits are used
  } cfg_wr_t;

endpackage
