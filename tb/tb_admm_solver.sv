// tb_admm_solver: a 22-variable problem (horizon 2, 2 inputs, 4 states of
// which 2 soft-constrained, 1 hard-constrained and 1 free) on two lanes.
// Random data is loaded, then a cold-started solve and several warm-started
// ones are run and compared with the bit-exact ADMM reference, including the
// shifted warm start of z and nu; every solve must take (IMAX + 1) * L_A
// cycles with L_A = ceil(n_A/P) + ceil(log2 n_A) + 9.
// Component order per stage, chosen so that each soft state is followed by
// its slack within its lane: [soft x_a, soft x_b, slack a, slack b, box, free].
module tb_admm_solver;
  import tb_ref_pkg::*;
  import fom_pkg::*;
  localparam int HOR = 2, NU = 2, NX = 4, NS = 2, P = 2, IMAX = 6, FRAC = 18, RHO = 1;
  localparam int NA = HOR * (NU + NX + NS) + NX + NS;
  localparam int LA = (NA + P - 1) / P + $clog2(NA) + 9;
  localparam int SEG0 = HOR * NU, SB = NX + NS;

  logic clk = 0, rst_n = 1, start = 0, warm = 0, busy, done;
  initial #1 rst_n = 0;   // a real reset edge before the first clock
  cfg_wr_t cfg;
  logic [31:0] x_in [NX];
  logic [31:0] z_out [NA];
  int checks = 0, failures = 0;
  int cnt [8];
  always #5 clk = ~clk;

  admm_solver #(.W(32), .FRAC(FRAC), .HOR(HOR), .NU(NU), .NX(NX), .NS(NS), .P(P),
                .IMAX(IMAX), .RHO_LOG2(RHO)) dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input cfg_sel_e sel, input int row, input int col, input word_t d);
    @(negedge clk);
    cfg = '{we: 1'b1, sel: sel, row: 16'(row), col: 16'(col), data: 64'(d)};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  function automatic bit last_stage(int j);
    return (j < SEG0) ? (j >= SEG0 - NU) : (j >= NA - SB);
  endfunction
  function automatic int shift(int j);
    return (j < SEG0) ? NU : SB;
  endfunction

  initial begin
    word_t M [], Mi [], lo [], hi [], xv [], z0 [], nu0 [], zr [], nur [];
    word_t wn;
    int ty [];
    M = new[NA*NA]; Mi = new[NA*(NX+1)]; lo = new[NA]; hi = new[NA]; xv = new[NX];
    ty = new[NA]; z0 = new[NA]; nu0 = new[NA];
    for (int k = 0; k < 8; k++) cnt[k] = 0;
    cfg = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wn = 32'sd1000;
    for (int j = 0; j < NA*NA; j++) M[j] = rnd(1 << 13);
    for (int j = 0; j < NA*(NX+1); j++) Mi[j] = rnd(1 << 17);
    for (int j = 0; j < NA; j++) begin
      int pos;
      if (j < SEG0) begin ty[j] = 1; lo[j] = -32'sd65536; hi[j] = 32'sd65536; end
      else begin
        pos = (j - SEG0) % SB;
        case (pos)
          0, 1: begin ty[j] = 2; lo[j] = -32'sd40000 + pos * 1000; hi[j] = 32'sd50000; end
          2, 3: begin ty[j] = 3; lo[j] = 0; hi[j] = 0; end
          4:    begin ty[j] = 1; lo[j] = -32'sd30000; hi[j] = 32'sd20000; end
          default: begin ty[j] = 0; lo[j] = 0; hi[j] = 0; end
        endcase
      end
    end
    for (int j = 0; j < NA; j++) for (int k = 0; k < NA; k++) wr(SEL_ITER_MAT, j, k, M[j*NA+k]);
    for (int j = 0; j < NA; j++) for (int k = 0; k <= NX; k++) wr(SEL_INIT_MAT, j, k, Mi[j*(NX+1)+k]);
    for (int j = 0; j < NA; j++) begin
      wr(SEL_LO, j, 0, lo[j]); wr(SEL_HI, j, 0, hi[j]); wr(SEL_TYPE, j, 0, word_t'(ty[j]));
    end
    wr(SEL_SCALAR, 0, 2, wn);
    for (int j = 0; j < NA; j++) begin z0[j] = 0; nu0[j] = 0; end
    for (int s = 0; s < 5; s++) begin
      int cycles;
      bit w;
      w = (s != 0) && (s != 3);
      if (!w) for (int j = 0; j < NA; j++) begin z0[j] = 0; nu0[j] = 0; end
      for (int k = 0; k < NX; k++) begin xv[k] = rnd(1 << 19); x_in[k] = xv[k]; end
      admm_solve(NA, NX, IMAX, FRAC, RHO, P, M, Mi, xv, ty, lo, hi, z0, nu0, zr, nur, cnt);
      @(negedge clk) begin start = 1; warm = w; end
      @(posedge clk); cycles = 0;
      @(negedge clk) start = 0;
      while (!done) begin @(posedge clk); cycles++; #1; end
      checks++;
      if (cycles != (IMAX + 1) * LA) begin failures++; $display("cycles %0d exp %0d", cycles, (IMAX + 1) * LA); end
      @(negedge clk);
      for (int j = 0; j < NA; j++) begin
        checks++;
        if ($signed(z_out[j]) !== zr[j]) begin failures++; $display("s%0d z[%0d]=%0d exp %0d", s, j, $signed(z_out[j]), zr[j]); end
      end
      // shifted warm start for the next solve
      for (int j = 0; j < NA; j++) begin
        z0[j]  = last_stage(j) ? wn : zr[j + shift(j)];
        nu0[j] = last_stage(j) ? 0  : nur[j + shift(j)];
      end
    end
    $display("cone regions in/up/lo/v+/v-/base %0d %0d %0d %0d %0d %0d, box saturations %0d",
             cnt[0], cnt[1], cnt[2], cnt[3], cnt[4], cnt[5], cnt[6]);
    for (int k = 0; k < 7; k++) begin checks++; if (cnt[k] == 0) begin failures++; $display("case %0d never hit", k); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
