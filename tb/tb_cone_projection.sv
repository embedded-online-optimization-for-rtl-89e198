// tb_cone_projection: streams (x, delta) pairs back to back through the cone
// projection and compares each output pair with the nearest point of the
// truncated cone found by enumerating candidate points (interior, base,
// both vertices, both edges) in real arithmetic, allowing 1 LSB for the
// halving. Checks the 2*L_A + 1 = 3 cycle delay of each component and that
// every region of the map was exercised.
module tb_cone_projection;
  import tb_ref_pkg::*;
  logic clk = 0, in_valid = 0, in_is_x = 0;
  logic signed [31:0] t, c_plus_r, c_minus_r, z;
  int checks = 0, failures = 0, cyc = 0;
  int hit [6];
  real ex_q [$];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  cone_projection #(.W(32)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real dist2(real ax, real ad, real bx, real bd);
    return (ax - bx) * (ax - bx) + (ad - bd) * (ad - bd);
  endfunction

  // Nearest feasible candidate; region index for the coverage count.
  function automatic void nearest(real x, real d, real c, real r,
                                  output real bx, output real bd, output int reg_o);
    real cx [6], cd [6], best, tt;
    bit ok [6];
    cx[0] = x; cd[0] = d; ok[0] = (d >= 0) && (x - c <= r + d) && (c - x <= r + d);
    tt = (x - c - r - d) / 2.0; cx[1] = x - tt; cd[1] = d + tt; ok[1] = (tt > 0) && (cd[1] >= 0);
    tt = (x - c + r + d) / 2.0; cx[2] = x - tt; cd[2] = d - tt; ok[2] = (tt < 0) && (cd[2] >= 0);
    cx[3] = c + r; cd[3] = 0; ok[3] = 1;
    cx[4] = c - r; cd[4] = 0; ok[4] = 1;
    cx[5] = x; cd[5] = 0; ok[5] = (x - c <= r) && (c - x <= r);
    best = 1.0e300; reg_o = -1; bx = 0; bd = 0;
    for (int k = 0; k < 6; k++)
      if (ok[k] && dist2(x, d, cx[k], cd[k]) < best - 1.0e-9) begin
        best = dist2(x, d, cx[k], cd[k]); bx = cx[k]; bd = cd[k]; reg_o = k;
      end
  endfunction

  // Output checker: a component leaves 3 cycles after it entered.
  logic [3:0] vpipe = 0;
  always @(posedge clk) vpipe <= {vpipe[2:0], in_valid};
  always @(negedge clk) if (vpipe[2]) begin
    real e;
    e = ex_q.pop_front();
    checks++;
    if ((real'(z) - e) > 1.01 || (e - real'(z)) > 1.01) begin
      failures++; $display("cyc %0d z=%0d exp=%f", cyc, z, e);
    end
  end

  initial begin
    for (int v = 0; v < 3000; v++) begin
      int c, r, x, d, region;
      real bx, bd;
      c = rnd(1 << 16); r = $urandom_range(1 << 16, 1 << 10);
      x = c + rnd(3 * r); d = rnd(2 * r);
      nearest(real'(x), real'(d), real'(c), real'(r), bx, bd, region);
      hit[region]++;
      ex_q.push_back(bx); ex_q.push_back(bd);
      @(negedge clk);
      in_valid = 1; in_is_x = 1; t = x; c_plus_r = c + r; c_minus_r = c - r;
      @(negedge clk);
      in_is_x = 0; t = d; c_plus_r = 0; c_minus_r = 0;
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    for (int k = 0; k < 6; k++) begin
      checks++; if (hit[k] == 0) begin failures++; $display("region %0d never hit", k); end
    end
    $display("regions inside/upper/lower/v+/v-/base = %0d %0d %0d %0d %0d %0d",
             hit[0], hit[1], hit[2], hit[3], hit[4], hit[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
