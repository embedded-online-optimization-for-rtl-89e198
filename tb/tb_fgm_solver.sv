// tb_fgm_solver: a 6-variable, 3-state problem on two lanes. Random problem
// data is loaded through the configuration port, then several solves with
// different states are run; the final iterate must match the bit-exact
// reference of the fast gradient method, and each solve must take exactly
// (IMAX + 1) * L_F cycles with L_F = ceil(n/P) + ceil(log2 n) + 6.
module tb_fgm_solver;
  import tb_ref_pkg::*;
  import fom_pkg::*;
  localparam int N = 6, NX = 3, P = 2, IMAX = 5, FRAC = 16;
  localparam int LF = (N + P - 1) / P + $clog2(N) + 6;

  logic clk = 0, rst_n = 1, start = 0, busy, done;
  initial #1 rst_n = 0;   // a real reset edge before the first clock
  cfg_wr_t cfg;
  logic [31:0] x_in [NX];
  logic [31:0] z_out [N];
  int checks = 0, failures = 0, sat_lo = 0, sat_hi = 0;
  always #5 clk = ~clk;

  fgm_solver #(.W(32), .FRAC(FRAC), .N(N), .NX(NX), .P(P), .IMAX(IMAX)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input cfg_sel_e sel, input int row, input int col, input word_t d);
    @(negedge clk);
    cfg = '{we: 1'b1, sel: sel, row: 16'(row), col: 16'(col), data: 64'(d)};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  initial begin
    word_t H [], Phi [], lo [], hi [], xv [], zr [];
    word_t beta, opb;
    H = new[N*N]; Phi = new[N*NX]; lo = new[N]; hi = new[N]; xv = new[NX];
    cfg = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    beta = 32'sd39322; opb = beta + 32'sd65536;   // beta = 0.6
    for (int j = 0; j < N*N; j++) H[j] = rnd(1 << 13);
    for (int j = 0; j < N*NX; j++) Phi[j] = rnd(1 << 15);
    for (int j = 0; j < N; j++) begin lo[j] = -32'sd32768; hi[j] = 32'sd32768; end
    for (int j = 0; j < N; j++) for (int k = 0; k < N; k++) wr(SEL_ITER_MAT, j, k, H[j*N+k]);
    for (int j = 0; j < N; j++) for (int k = 0; k < NX; k++) wr(SEL_INIT_MAT, j, k, Phi[j*NX+k]);
    for (int j = 0; j < N; j++) begin wr(SEL_LO, j, 0, lo[j]); wr(SEL_HI, j, 0, hi[j]); end
    wr(SEL_SCALAR, 0, 0, beta);
    wr(SEL_SCALAR, 0, 1, opb);
    for (int s = 0; s < 6; s++) begin
      int cycles;
      for (int k = 0; k < NX; k++) begin xv[k] = rnd(1 << (14 + s)); x_in[k] = xv[k]; end
      fgm_solve(N, NX, IMAX, FRAC, H, Phi, xv, lo, hi, beta, opb, zr, sat_lo, sat_hi);
      @(negedge clk) start = 1;
      @(posedge clk); cycles = 0;
      @(negedge clk) start = 0;
      while (!done) begin @(posedge clk); cycles++; #1; end
      checks++;
      if (cycles != (IMAX + 1) * LF) begin failures++; $display("cycles %0d exp %0d", cycles, (IMAX + 1) * LF); end
      @(negedge clk);
      for (int j = 0; j < N; j++) begin
        checks++;
        if ($signed(z_out[j]) !== zr[j]) begin failures++; $display("s%0d z[%0d]=%0d exp %0d", s, j, $signed(z_out[j]), zr[j]); end
      end
    end
    checks++; if (sat_lo == 0 || sat_hi == 0) begin failures++; $display("no saturation"); end
    $display("saturations low %0d high %0d", sat_lo, sat_hi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
