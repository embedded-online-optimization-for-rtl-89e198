// tb_box_projection: random values against random intervals, with many
// values outside on either side and on the bounds; checks the saturated
// output and the published delay of L_A + 1 = 2 cycles.
module tb_box_projection;
  import tb_ref_pkg::*;
  logic clk = 0;
  logic signed [31:0] t, z_min, z_max, z;
  word_t e1, e2;
  int checks = 0, failures = 0, n_lo = 0, n_hi = 0, n_in = 0;
  always #5 clk = ~clk;
  box_projection #(.W(32)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    e1 = 0; e2 = 0;
    for (int v = 0; v < 500; v++) begin
      @(negedge clk);
      z_min = rnd(1 << 16) - (1 << 16);
      z_max = rnd(1 << 16) + (1 << 16);
      case (v % 5)
        0: t = z_min;
        1: t = z_max;
        2: t = (v < 10) ? 32'sh8000_0000 : rnd(1 << 30);
        default: t = rnd(1 << 18);
      endcase
      // value expected two cycles after this one
      if (v >= 2) begin
        checks++;
        if (z !== e2) begin failures++; $display("v=%0d z=%0d exp=%0d", v, z, e2); end
      end
      e2 = e1;
      e1 = sat(t, z_min, z_max);
      if (t < z_min) n_lo++; else if (t > z_max) n_hi++; else n_in++;
    end
    checks++; if (n_lo == 0 || n_hi == 0 || n_in == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
