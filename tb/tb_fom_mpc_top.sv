// tb_fom_mpc_top: end-to-end test of the complete design at its default
// (published) sizes, with no parameter overrides: the fast gradient solver
// with 40 variables, 8 states and 15 iterations, and the ADMM solver with
// 216 variables (horizon 10, 4 inputs, 12 states of which 4 soft) and 40
// iterations, one lane each.
//
// Random matrices and bounds are loaded through both configuration ports at
// one write per cycle, then a series of solves is run on both solvers at the
// same time. Every solution is compared bit for bit with the reference
// models in tb_ref_pkg, and every solve must take exactly (I_max + 1) * L
// cycles, with L_F = n + ceil(log2 n) + 6 = 52 and
// L_A = n_A + ceil(log2 n_A) + 9 = 233 (P = 1, one-cycle adders and
// multipliers). The test counts each mechanism and fails if any of them never
// happens: set-up passes, iterations, FGM lower and upper saturation, ADMM box
// saturation, all six cone-projection cases, warm starts and cold starts.
// ADMM component order per stage: inputs (box), then for the state block
// [x_s0, d_0, x_s1, d_1, ... x_s3, d_3, 6 box states, 2 free states], so that
// each soft state is followed by its slack in the single lane.
module tb_fom_mpc_top;
  import tb_ref_pkg::*;
  import fom_pkg::*;
  localparam int FN = 40, FNX = 8, FI = 15, FFRAC = 16;
  localparam int HOR = 10, NU = 4, NX = 12, NS = 4, AIMAX = 40, AFRAC = 18, RHO = 1;
  localparam int NA = HOR * (NU + NX + NS) + NX + NS;
  localparam int LF = FN + $clog2(FN) + 6;
  localparam int LA = NA + $clog2(NA) + 9;
  localparam int SEG0 = HOR * NU, SB = NX + NS;
  localparam int NSOLVE = 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock
  cfg_wr_t fgm_cfg, admm_cfg;
  logic fgm_start = 0, admm_start = 0, admm_warm = 0;
  logic fgm_busy, fgm_done, admm_busy, admm_done;
  logic [31:0] fgm_x [FNX];
  logic [31:0] admm_x [NX];
  logic [31:0] fgm_z [FN];
  logic [31:0] admm_z [NA];
  int checks = 0, failures = 0;
  int fsat_lo = 0, fsat_hi = 0, n_setup_f = 0, n_setup_a = 0, n_iter_f = 0, n_iter_a = 0;
  int n_warm = 0, n_cold = 0, n_fsolve = 0, n_asolve = 0;
  int cnt [8];
  always #5 clk = ~clk;

  fom_mpc_top dut (.*);

  initial begin
    repeat (600000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // count set-up passes and iterations from the sequencers
  always @(posedge clk) if (rst_n) begin
    if (dut.u_fgm.run_q && dut.u_fgm.cyc_q == 0) begin
      if (dut.u_fgm.pass_q == 0) n_setup_f++; else n_iter_f++;
    end
    if (dut.u_admm.run_q && dut.u_admm.cyc_q == 0) begin
      if (dut.u_admm.pass_q == 0) n_setup_a++; else n_iter_a++;
    end
  end

  function automatic bit last_stage(int j);
    return (j < SEG0) ? (j >= SEG0 - NU) : (j >= NA - SB);
  endfunction
  function automatic int shift(int j);
    return (j < SEG0) ? NU : SB;
  endfunction

  word_t H [], Phi [], flo [], fhi [], beta, opb;
  word_t M [], Mi [], alo [], ahi [], wn;
  int ty [];

  task automatic load_fgm();
    for (int j = 0; j < FN; j++) for (int k = 0; k < FN; k++) begin
      @(negedge clk) fgm_cfg = '{we: 1'b1, sel: SEL_ITER_MAT, row: 16'(j), col: 16'(k), data: 64'(H[j*FN+k])};
    end
    for (int j = 0; j < FN; j++) for (int k = 0; k < FNX; k++) begin
      @(negedge clk) fgm_cfg = '{we: 1'b1, sel: SEL_INIT_MAT, row: 16'(j), col: 16'(k), data: 64'(Phi[j*FNX+k])};
    end
    for (int j = 0; j < FN; j++) begin
      @(negedge clk) fgm_cfg = '{we: 1'b1, sel: SEL_LO, row: 16'(j), col: 16'd0, data: 64'(flo[j])};
      @(negedge clk) fgm_cfg = '{we: 1'b1, sel: SEL_HI, row: 16'(j), col: 16'd0, data: 64'(fhi[j])};
    end
    @(negedge clk) fgm_cfg = '{we: 1'b1, sel: SEL_SCALAR, row: 16'd0, col: 16'd0, data: 64'(beta)};
    @(negedge clk) fgm_cfg = '{we: 1'b1, sel: SEL_SCALAR, row: 16'd0, col: 16'd1, data: 64'(opb)};
    @(negedge clk) fgm_cfg.we = 1'b0;
  endtask

  task automatic load_admm();
    for (int j = 0; j < NA; j++) for (int k = 0; k < NA; k++) begin
      @(negedge clk) admm_cfg = '{we: 1'b1, sel: SEL_ITER_MAT, row: 16'(j), col: 16'(k), data: 64'(M[j*NA+k])};
    end
    for (int j = 0; j < NA; j++) for (int k = 0; k <= NX; k++) begin
      @(negedge clk) admm_cfg = '{we: 1'b1, sel: SEL_INIT_MAT, row: 16'(j), col: 16'(k), data: 64'(Mi[j*(NX+1)+k])};
    end
    for (int j = 0; j < NA; j++) begin
      @(negedge clk) admm_cfg = '{we: 1'b1, sel: SEL_LO, row: 16'(j), col: 16'd0, data: 64'(alo[j])};
      @(negedge clk) admm_cfg = '{we: 1'b1, sel: SEL_HI, row: 16'(j), col: 16'd0, data: 64'(ahi[j])};
      @(negedge clk) admm_cfg = '{we: 1'b1, sel: SEL_TYPE, row: 16'(j), col: 16'd0, data: 64'(ty[j])};
    end
    @(negedge clk) admm_cfg = '{we: 1'b1, sel: SEL_SCALAR, row: 16'd0, col: 16'd2, data: 64'(wn)};
    @(negedge clk) admm_cfg.we = 1'b0;
  endtask

  task automatic run_fgm();
    word_t xv [], zr [];
    xv = new[FNX];
    for (int s = 0; s < NSOLVE; s++) begin
      int cycles;
      for (int k = 0; k < FNX; k++) begin xv[k] = rnd(1 << (14 + s)); fgm_x[k] = xv[k]; end
      fgm_solve(FN, FNX, FI, FFRAC, H, Phi, xv, flo, fhi, beta, opb, zr, fsat_lo, fsat_hi);
      @(negedge clk) fgm_start = 1;
      @(posedge clk); cycles = 0;
      @(negedge clk) fgm_start = 0;
      while (!fgm_done) begin @(posedge clk); cycles++; #1; end
      checks++;
      if (cycles != (FI + 1) * LF) begin failures++; $display("fgm cycles %0d exp %0d", cycles, (FI + 1) * LF); end
      @(negedge clk);
      for (int j = 0; j < FN; j++) begin
        checks++;
        if ($signed(fgm_z[j]) !== zr[j]) begin failures++; $display("fgm s%0d z[%0d]=%0d exp %0d", s, j, $signed(fgm_z[j]), zr[j]); end
      end
      n_fsolve++;
    end
  endtask

  task automatic run_admm();
    word_t xv [], z0 [], nu0 [], zr [], nur [];
    xv = new[NX]; z0 = new[NA]; nu0 = new[NA];
    for (int j = 0; j < NA; j++) begin z0[j] = 0; nu0[j] = 0; end
    for (int s = 0; s < NSOLVE; s++) begin
      int cycles;
      bit w;
      w = (s == 1) || (s == 2);
      if (w) n_warm++; else n_cold++;
      if (!w) for (int j = 0; j < NA; j++) begin z0[j] = 0; nu0[j] = 0; end
      for (int k = 0; k < NX; k++) begin xv[k] = rnd(1 << 19); admm_x[k] = xv[k]; end
      admm_solve(NA, NX, AIMAX, AFRAC, RHO, 1, M, Mi, xv, ty, alo, ahi, z0, nu0, zr, nur, cnt);
      @(negedge clk) begin admm_start = 1; admm_warm = w; end
      @(posedge clk); cycles = 0;
      @(negedge clk) admm_start = 0;
      while (!admm_done) begin @(posedge clk); cycles++; #1; end
      checks++;
      if (cycles != (AIMAX + 1) * LA) begin failures++; $display("admm cycles %0d exp %0d", cycles, (AIMAX + 1) * LA); end
      @(negedge clk);
      for (int j = 0; j < NA; j++) begin
        checks++;
        if ($signed(admm_z[j]) !== zr[j]) begin failures++; $display("admm s%0d z[%0d]=%0d exp %0d", s, j, $signed(admm_z[j]), zr[j]); end
      end
      for (int j = 0; j < NA; j++) begin
        z0[j]  = last_stage(j) ? wn : zr[j + shift(j)];
        nu0[j] = last_stage(j) ? 0  : nur[j + shift(j)];
      end
      n_asolve++;
    end
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    $display("  %-26s %0d", what, n);
  endtask

  initial begin
    H = new[FN*FN]; Phi = new[FN*FNX]; flo = new[FN]; fhi = new[FN];
    M = new[NA*NA]; Mi = new[NA*(NX+1)]; alo = new[NA]; ahi = new[NA]; ty = new[NA];
    for (int k = 0; k < 8; k++) cnt[k] = 0;
    fgm_cfg = '0; admm_cfg = '0;
    for (int k = 0; k < FNX; k++) fgm_x[k] = 0;
    for (int k = 0; k < NX; k++) admm_x[k] = 0;
    // FGM problem data: beta = 0.6, bounds +-0.5
    beta = 32'sd39322; opb = beta + 32'sd65536;
    for (int j = 0; j < FN*FN; j++) H[j] = rnd(1 << 12);
    for (int j = 0; j < FN*FNX; j++) Phi[j] = rnd(1 << 14);
    for (int j = 0; j < FN; j++) begin flo[j] = -32'sd32768; fhi[j] = 32'sd32768; end
    // ADMM problem data
    wn = 32'sd1000;
    for (int j = 0; j < NA*NA; j++) M[j] = rnd(1 << 11);
    for (int j = 0; j < NA*(NX+1); j++) Mi[j] = rnd(1 << 17);
    for (int j = 0; j < NA; j++) begin
      int pos;
      if (j < SEG0) begin ty[j] = 1; alo[j] = -32'sd65536; ahi[j] = 32'sd65536; end
      else begin
        pos = (j - SEG0) % SB;
        if (pos < 2 * NS) begin
          if (pos % 2 == 0) begin ty[j] = 2; alo[j] = -32'sd40000 + pos * 1000; ahi[j] = 32'sd50000; end
          else begin ty[j] = 3; alo[j] = 0; ahi[j] = 0; end
        end else if (pos < SB - 2) begin ty[j] = 1; alo[j] = -32'sd30000; ahi[j] = 32'sd20000; end
        else begin ty[j] = 0; alo[j] = 0; ahi[j] = 0; end
      end
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    fork load_fgm(); load_admm(); join
    fork run_fgm(); run_admm(); join
    $display("mechanism counts:");
    need("FGM solves", n_fsolve);
    need("FGM set-up passes", n_setup_f);
    need("FGM iterations", n_iter_f);
    need("FGM lower saturations", fsat_lo);
    need("FGM upper saturations", fsat_hi);
    need("ADMM solves", n_asolve);
    need("ADMM set-up passes", n_setup_a);
    need("ADMM iterations", n_iter_a);
    need("ADMM warm starts", n_warm);
    need("ADMM cold starts", n_cold);
    need("ADMM box saturations", cnt[6]);
    need("cone: inside", cnt[0]);
    need("cone: upper edge", cnt[1]);
    need("cone: lower edge", cnt[2]);
    need("cone: vertex c+r", cnt[3]);
    need("cone: vertex c-r", cnt[4]);
    need("cone: below base", cnt[5]);
    checks++;
    if (n_iter_f != NSOLVE * FI || n_iter_a != NSOLVE * AIMAX) begin
      failures++; $display("iteration counts %0d %0d", n_iter_f, n_iter_a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
