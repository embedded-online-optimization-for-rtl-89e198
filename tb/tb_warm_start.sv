// tb_warm_start: a 10-element stream whose first two elements form the first
// horizon stage. Checks pass-through with one cycle of delay, then capture of
// a final iterate and its replay shifted by one stage with the last stage
// padded with w_n, repeated over several solves, and a cold start (all
// zeros, including the last-stage slots).
module tb_warm_start;
  localparam int L = 10, S = 2;
  logic clk = 0, rst_n = 1, valid = 0, capture = 0, replay = 0, cold = 0, in_skip = 0, in_pad = 0;
  initial #1 rst_n = 0;   // a real reset edge before the first clock
  logic signed [31:0] in_data, w_n, out_data;
  logic signed [31:0] v [L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  warm_start #(.W(32), .DEPTH(L)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Drive one pass of L elements; check the output one cycle after each.
  task automatic pass(input bit cap, input bit rep, input bit cld, input logic signed [31:0] exp_o [L]);
    for (int j = 0; j <= L; j++) begin
      @(negedge clk);
      if (j > 0) begin
        checks++;
        if (out_data !== exp_o[j-1]) begin
          failures++; $display("cap%0d rep%0d j%0d out %0d exp %0d", cap, rep, j-1, out_data, exp_o[j-1]);
        end
      end
      valid = (j < L); capture = cap; replay = rep; cold = cld;
      in_skip = (j < S); in_pad = (j >= L - S);
      in_data = (j < L) ? v[j] : 0;
    end
    @(negedge clk) valid = 0; capture = 0; replay = 0; cold = 0;
  endtask

  initial begin
    logic signed [31:0] e [L], prev [L];
    w_n = 32'sd77;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      for (int j = 0; j < L; j++) v[j] = $urandom;
      pass(0, 0, 0, v);              // iterations: straight through
      pass(1, 0, 0, v);              // last iteration: captured, still passed
      prev = v;
      for (int j = 0; j < L; j++) v[j] = $urandom;
      for (int j = 0; j < L; j++) e[j] = (j >= L - S) ? w_n : prev[j + S];
      pass(0, 1, 0, e);              // next solve: shifted replay
    end
    pass(1, 0, 0, v);
    for (int j = 0; j < L; j++) e[j] = 0;
    pass(0, 1, 1, e);                // cold start: all zeros, capture discarded
    for (int j = 0; j < L; j++) e[j] = (j >= L - S) ? w_n : 0;
    pass(0, 1, 0, e);                // and nothing is left behind
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
