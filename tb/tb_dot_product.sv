// tb_dot_product: streams random vector pairs back to back through a
// 5-input dot product and checks every sum against a reference and the
// latency L_M + L_A*ceil(log2 5) = 4 cycles.
module tb_dot_product;
  import tb_ref_pkg::*;
  localparam int N = 5, FRAC = 16, LAT = 4, NV = 200;
  logic clk = 0, rst_n = 1, in_valid = 0, out_valid;
  initial #1 rst_n = 0;   // a real reset edge before the first clock
  logic signed [31:0] a [N], b [N], sum;
  word_t exp_q [$];
  int checks = 0, failures = 0, cyc = 0, issue_cyc [$];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  dot_product #(.W(32), .FRAC(FRAC), .N(N)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (out_valid) begin
    word_t e; int c;
    e = exp_q.pop_front(); c = issue_cyc.pop_front();
    checks += 2;
    if (sum !== e) begin failures++; $display("sum %0d exp %0d", sum, e); end
    if (cyc - c != LAT) begin failures++; $display("latency %0d", cyc - c); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      word_t s;
      s = 0;
      @(negedge clk);
      for (int j = 0; j < N; j++) begin
        a[j] = (v < 3) ? 32'sh7fff_ffff - j : rnd(1 << 22);
        b[j] = (v < 3) ? 32'sh0001_0000 : rnd(1 << 22);
        s += fxmul(a[j], b[j], FRAC);
      end
      in_valid = ($urandom_range(3, 0) != 0);
      if (in_valid) begin exp_q.push_back(s); issue_cyc.push_back(cyc); end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++; if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
