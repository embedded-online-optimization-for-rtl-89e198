// tb_s2p_shift_register: three lanes deliver an 8-element vector (lane k
// carries elements k, k+3, k+6) over three cycles, with idle cycles between;
// the parallel vector must change only on the cycle after the last element
// and then equal the delivered vector. Repeated for many random vectors.
module tb_s2p_shift_register;
  localparam int P = 3, N = 8, R = 3;
  logic clk = 0, rst_n = 1, in_valid = 0, in_last = 0;
  initial #1 rst_n = 0;   // a real reset edge before the first clock
  logic [31:0] in_data [P];
  logic [31:0] vec [N];
  logic [31:0] v_now [N], v_old [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  s2p_shift_register #(.W(32), .P(P), .N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int j = 0; j < N; j++) v_old[j] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      for (int j = 0; j < N; j++) v_now[j] = $urandom;
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        for (int j = 0; j < N; j++) begin checks++; if (vec[j] !== v_old[j]) failures++; end
        in_valid = 1; in_last = (r == R - 1);
        for (int k = 0; k < P; k++) in_data[k] = (r * P + k < N) ? v_now[r * P + k] : 32'hffff_ffff;
        if ($urandom_range(1, 0) == 1) begin
          @(negedge clk); in_valid = 0; in_last = 0;
        end
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (vec[j] !== v_now[j]) begin failures++; $display("t%0d j%0d %h exp %h", t, j, vec[j], v_now[j]); end
        v_old[j] = v_now[j];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
