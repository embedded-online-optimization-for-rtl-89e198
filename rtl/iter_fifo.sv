// iter_fifo: first-in first-out memory that holds one lane's share of an
// iterate (beta*z_i in the fast gradient method, nu_i in ADMM) from one
// iteration to the next.
//
// Show-ahead: dout is the oldest entry whenever the FIFO is not empty, and
// pop discards it at the clock edge. push and pop may happen in the same
// cycle. flush empties the FIFO synchronously. DEPTH is ceil(n/P), the size
// of the memory blocks given for the architecture.
module iter_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 40
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else if (flush) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // A lane never overfills or underruns its iterate FIFO.
  a_no_overflow:  assert property (@(posedge clk) disable iff (flush) !(push && !pop && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (flush) !(pop && empty));
endmodule
