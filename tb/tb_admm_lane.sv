// tb_admm_lane: tests one ADMM lane on its own (P = 1, n_A = 11: horizon 2,
// 1 input, 2 states of which 1 soft), with the testbench in the role of the
// sequencer and of the serial-to-parallel register. Rows of a pass are
// issued back to back (the cone projection needs a soft state and its slack
// in consecutive slots; an assertion in the lane checks this), with a random
// gap between passes. Each w output must appear exactly ceil(log2 n_A) + 8 cycles
// after its row was issued; the serial-to-parallel register adds one more,
// which makes up the pipeline part ceil(log2 n_A) + 9 of L_A. Cold and warm
// (shifted, w_N-padded) solves are compared bit for bit with the ADMM
// reference model. Component order: [u0, u1, (x_s, d, x_box) x 3].
module tb_admm_lane;
  import tb_ref_pkg::*;
  import fom_pkg::*;
  localparam int HOR = 2, NU = 1, NX = 2, NS = 1, IMAX = 4, FRAC = 18, RHO = 1;
  localparam int N = HOR * (NU + NX + NS) + NX + NS, SEG0 = HOR * NU, SB = NX + NS;
  localparam int R = N, RW = $clog2(R + 1);
  localparam int LAT = $clog2(N) + 8;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = SEL_ITER_MAT;
  logic [15:0] cfg_row = 0, cfg_col = 0;
  logic [31:0] cfg_data = 0;
  logic signed [31:0] w_n = 32'sd777;
  logic cold = 1, issue_valid = 0, issue_init = 0, issue_last = 0, flush = 0;
  logic [RW-1:0] issue_row = 0;
  logic [31:0] vec_w [N];
  logic [31:0] vec_x [NX];
  logic w_valid, w_last_row, z_valid, z_last_row;
  logic [31:0] w_data, z_data;
  int checks = 0, failures = 0, cyc = 0;
  int issue_cyc [R];
  int nw = 0, nz = 0;
  word_t wbuf [N], zbuf [N];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  admm_lane #(.W(32), .FRAC(FRAC), .N(N), .NX(NX), .P(1), .LANE(0), .RHO_LOG2(RHO),
              .SEG0(SEG0), .SHIFT0(NU), .SHIFT1(SB)) dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (w_valid) begin
      checks += 2;
      if (cyc - issue_cyc[nw] != LAT) begin failures++; $display("w row %0d latency %0d", nw, cyc - issue_cyc[nw]); end
      if (w_last_row !== (nw == R - 1)) failures++;
      wbuf[nw] = w_data;
      nw++;
    end
    if (z_valid) begin
      checks++;
      if (z_last_row !== (nz == R - 1)) failures++;
      zbuf[nz] = z_data;
      nz++;
    end
  end

  task automatic wr(input cfg_sel_e sel, input int row, input int col, input word_t d);
    @(negedge clk) begin cfg_we = 1; cfg_sel = sel; cfg_row = 16'(row); cfg_col = 16'(col); cfg_data = d; end
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic run_pass(input bit init, input bit last);
    nw = 0; nz = 0;
    for (int r = 0; r < R; r++) begin
      if (r == 0) repeat ($urandom_range(0, 5)) @(negedge clk) issue_valid = 0;
      @(negedge clk) begin
        issue_valid = 1; issue_row = RW'(r); issue_init = init; issue_last = last;
        issue_cyc[r] = cyc + 1;
      end
    end
    @(negedge clk) issue_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (nw != R || nz != (last ? R : 0)) begin failures++; $display("counts w %0d z %0d", nw, nz); end
    for (int j = 0; j < N; j++) vec_w[j] = wbuf[j];
  endtask

  function automatic bit last_stage(int j);
    return (j < SEG0) ? (j >= SEG0 - NU) : (j >= N - SB);
  endfunction
  function automatic int shift(int j);
    return (j < SEG0) ? NU : SB;
  endfunction

  initial begin
    word_t M [], Mi [], lo [], hi [], x [], z0 [], nu0 [], zr [], nur [];
    int ty [];
    int cnt [8];
    M = new[N*N]; Mi = new[N*(NX+1)]; lo = new[N]; hi = new[N]; x = new[NX];
    ty = new[N]; z0 = new[N]; nu0 = new[N];
    for (int k = 0; k < 8; k++) cnt[k] = 0;
    for (int k = 0; k < N; k++) vec_w[k] = 0;
    for (int k = 0; k < NX; k++) vec_x[k] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int j = 0; j < N*N; j++) begin M[j] = rnd(1 << 14); wr(SEL_ITER_MAT, j / N, j % N, M[j]); end
    for (int j = 0; j < N*(NX+1); j++) begin Mi[j] = rnd(1 << 17); wr(SEL_INIT_MAT, j / (NX+1), j % (NX+1), Mi[j]); end
    for (int j = 0; j < N; j++) begin
      int pos;
      pos = (j - SEG0) % SB;
      if (j < SEG0 || pos == 2) begin ty[j] = 1; lo[j] = -32'sd50000; hi[j] = 32'sd40000; end
      else if (pos == 0) begin ty[j] = 2; lo[j] = -32'sd30000; hi[j] = 32'sd60000; end
      else begin ty[j] = 3; lo[j] = 0; hi[j] = 0; end
      wr(SEL_LO, j, 0, lo[j]); wr(SEL_HI, j, 0, hi[j]); wr(SEL_TYPE, j, 0, word_t'(ty[j]));
    end
    for (int j = 0; j < N; j++) begin z0[j] = 0; nu0[j] = 0; end
    for (int s = 0; s < 6; s++) begin
      bit w;
      w = (s % 3) != 0;
      if (!w) for (int j = 0; j < N; j++) begin z0[j] = 0; nu0[j] = 0; end
      for (int k = 0; k < NX; k++) begin x[k] = rnd(1 << 19); vec_x[k] = x[k]; end
      admm_solve(N, NX, IMAX, FRAC, RHO, 1, M, Mi, x, ty, lo, hi, z0, nu0, zr, nur, cnt);
      @(negedge clk) begin cold = !w; flush = 1; end
      @(negedge clk) flush = 0;
      for (int i = 0; i <= IMAX; i++) run_pass(i == 0, i == IMAX);
      for (int j = 0; j < N; j++) begin
        checks++;
        if ($signed(zbuf[j]) !== zr[j]) begin failures++; $display("s%0d z[%0d]=%0d exp %0d", s, j, $signed(zbuf[j]), zr[j]); end
        z0[j]  = last_stage(j) ? w_n : zr[j + shift(j)];
        nu0[j] = last_stage(j) ? 0   : nur[j + shift(j)];
      end
    end
    $display("cone regions in/up/lo/v+/v-/base %0d %0d %0d %0d %0d %0d, box saturations %0d",
             cnt[0], cnt[1], cnt[2], cnt[3], cnt[4], cnt[5], cnt[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
