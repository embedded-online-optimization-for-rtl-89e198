// tb_fgm_lane: tests one fast-gradient lane on its own (P = 1, n = 7, n_x = 3),
// with the testbench in the role of the sequencer and of the serial-to-parallel
// register. Rows are issued with random bubbles; each output must appear
// exactly ceil(log2 n) + 5 cycles after its row was issued; the serial-to-
// parallel register adds one more, which makes up the pipeline part
// ceil(log2 n) + 6 of L_F = ceil(n/P) + ceil(log2 n) + 6. A set-up pass (z_0 = pi_K(0),
// y_0 = z_0) is followed by iterations with random y vectors; the y stream
// (1+beta) z - beta z_prev and, in the last pass, the z stream are compared
// bit for bit with a model. Saturation at both bounds is counted.
module tb_fgm_lane;
  import tb_ref_pkg::*;
  import fom_pkg::*;
  localparam int N = 7, NX = 3, FRAC = 16, R = N, RW = $clog2(R + 1);
  localparam int LAT = $clog2(N) + 5;   // + 1 in the s2p register = L_F - R

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real reset edge before the first clock
  logic cfg_we = 0;
  cfg_sel_e cfg_sel = SEL_ITER_MAT;
  logic [15:0] cfg_row = 0, cfg_col = 0;
  logic [31:0] cfg_data = 0;
  logic signed [31:0] beta = 32'sd39322, one_plus_beta = 32'sd104858;
  logic issue_valid = 0, issue_init = 0, issue_last = 0, flush = 0;
  logic [RW-1:0] issue_row = 0;
  logic [31:0] vec_y [N];
  logic [31:0] vec_x [NX];
  logic y_valid, y_last_row, z_valid, z_last_row;
  logic [31:0] y_data, z_data;
  int checks = 0, failures = 0, cyc = 0, sat_lo = 0, sat_hi = 0;
  int issue_cyc [R];
  int ny = 0, nz = 0;
  word_t exp_y [R], exp_z [R];
  bit exp_zv;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  fgm_lane #(.W(32), .FRAC(FRAC), .N(N), .NX(NX), .P(1)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // output monitor
  always @(negedge clk) if (rst_n) begin
    if (y_valid) begin
      checks += 3;
      if (cyc - issue_cyc[ny] != LAT) begin failures++; $display("y row %0d latency %0d", ny, cyc - issue_cyc[ny]); end
      if ($signed(y_data) !== exp_y[ny]) begin failures++; $display("y[%0d]=%0d exp %0d", ny, $signed(y_data), exp_y[ny]); end
      if (y_last_row !== (ny == R - 1)) failures++;
      ny++;
    end
    if (z_valid) begin
      checks += 2;
      if (!exp_zv || $signed(z_data) !== exp_z[nz]) begin failures++; $display("z[%0d]=%0d exp %0d", nz, $signed(z_data), exp_z[nz]); end
      if (z_last_row !== (nz == R - 1)) failures++;
      nz++;
    end
  end

  task automatic wr(input cfg_sel_e sel, input int row, input int col, input word_t d);
    @(negedge clk) begin cfg_we = 1; cfg_sel = sel; cfg_row = 16'(row); cfg_col = 16'(col); cfg_data = d; end
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic run_pass(input bit init, input bit last);
    ny = 0; nz = 0;
    for (int r = 0; r < R; r++) begin
      while ($urandom_range(0, 2) == 0) @(negedge clk) issue_valid = 0;
      @(negedge clk) begin
        issue_valid = 1; issue_row = RW'(r); issue_init = init; issue_last = last;
        issue_cyc[r] = cyc + 1;
      end
    end
    @(negedge clk) issue_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (ny != R || nz != (last ? R : 0)) begin failures++; $display("counts y %0d z %0d", ny, nz); end
  endtask

  initial begin
    word_t H [N*N], Phi [N*NX], lo [N], hi [N], x [NX], phix [N], yv [N], bz [N], z, t;
    for (int k = 0; k < N; k++) vec_y[k] = 0;
    for (int k = 0; k < NX; k++) vec_x[k] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int j = 0; j < N*N; j++) begin H[j] = rnd(1 << 14); wr(SEL_ITER_MAT, j / N, j % N, H[j]); end
    for (int j = 0; j < N*NX; j++) begin Phi[j] = rnd(1 << 15); wr(SEL_INIT_MAT, j / NX, j % NX, Phi[j]); end
    for (int j = 0; j < N; j++) begin
      lo[j] = -rnd(20000) - 32'sd5000; hi[j] = 32'sd20000 + rnd(5000);
      wr(SEL_LO, j, 0, lo[j]); wr(SEL_HI, j, 0, hi[j]);
    end
    for (int s = 0; s < 3; s++) begin
      for (int k = 0; k < NX; k++) begin x[k] = rnd(1 << 17); vec_x[k] = x[k]; end
      for (int j = 0; j < N; j++) begin
        phix[j] = 0;
        for (int k = 0; k < NX; k++) phix[j] += fxmul(Phi[j*NX+k], x[k], FRAC);
      end
      @(negedge clk) flush = 1;
      @(negedge clk) flush = 0;
      // set-up pass
      for (int j = 0; j < N; j++) begin
        z = sat(0, lo[j], hi[j]); exp_y[j] = z; bz[j] = fxmul(beta, z, FRAC);
      end
      exp_zv = 0;
      run_pass(1, 0);
      for (int i = 1; i <= 4; i++) begin
        for (int k = 0; k < N; k++) begin yv[k] = rnd(1 << 16); vec_y[k] = yv[k]; end
        exp_zv = (i == 4);
        for (int j = 0; j < N; j++) begin
          t = 0;
          for (int k = 0; k < N; k++) t += fxmul(H[j*N+k], yv[k], FRAC);
          t -= phix[j];
          if (t < lo[j]) sat_lo++; else if (t > hi[j]) sat_hi++;
          z = sat(t, lo[j], hi[j]);
          exp_z[j] = z;
          exp_y[j] = fxmul(one_plus_beta, z, FRAC) - bz[j];
          bz[j] = fxmul(beta, z, FRAC);
        end
        run_pass(0, i == 4);
      end
    end
    $display("saturations low %0d high %0d", sat_lo, sat_hi);
    checks++; if (sat_lo == 0 || sat_hi == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
