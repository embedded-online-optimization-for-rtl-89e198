// tb_iter_fifo: random push/pop traffic (never overfilling or underrunning,
// as the lanes guarantee) against a queue model, including simultaneous
// push and pop, a flush, and the full/empty flags.
module tb_iter_fifo;
  localparam int D = 7;
  logic clk = 0, rst_n = 1, flush = 0, push = 0, pop = 0, empty, full;
  initial #1 rst_n = 0;   // a real reset edge before the first clock
  logic [31:0] din, dout;
  logic [31:0] q [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  iter_fifo #(.W(32), .DEPTH(D)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int v = 0; v < 3000; v++) begin
      @(negedge clk);
      checks += 3;
      if (empty !== (q.size() == 0)) failures++;
      if (full  !== (q.size() == D)) failures++;
      if (q.size() > 0 && dout !== q[0]) begin failures++; $display("dout %h exp %h", dout, q[0]); end
      flush = (v == 1500);
      push = (q.size() < D) ? ($urandom_range(1, 0) == 1) : 1'b0;
      pop  = (q.size() > 0) ? ($urandom_range(1, 0) == 1) : 1'b0;
      if (q.size() == D && pop) push = 1;   // push and pop at once when full
      din = $urandom;
      @(posedge clk);
      #1;
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
