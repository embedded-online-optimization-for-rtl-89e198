// warm_start: hardware support for warm starting one lane's share of an ADMM
// variable (z or nu).
//
// In the last iteration of a solve (capture = 1) the lane's stream of final
// values is written into a FIFO, leaving out the elements that belong to the
// first stage of the horizon (in_skip), so that the FIFO holds the solution
// shifted forward by one stage. When the next solve starts (replay = 1) the
// output multiplexer sends the FIFO contents instead of the stream, and the
// slots of the last stage (in_pad) are filled with the constant w_n. In all
// other iterations the stream passes straight through. The output is
// registered: the block adds one cycle of delay, as published.
// Published structure: a w_N multiplexer in front of the FIFO and a stream /
// FIFO multiplexer behind it. Here the w_N multiplexer sits behind the FIFO
// (same result, but the padding needs no extra FIFO writes after the stream
// has ended); that placement and the cold start (cold = 1 replays all zeros, also in the last-stage slots, and
// empties the FIFO) are this design's choices. The padding value is
// constant; the option of deriving it from previous values is not built.
module warm_start #(
  parameter int W     = 32,
  parameter int DEPTH = 216
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid,
  input  logic                capture,
  input  logic                replay,
  input  logic                cold,
  input  logic                in_skip,
  input  logic                in_pad,
  input  logic signed [W-1:0] in_data,
  input  logic signed [W-1:0] w_n,
  output logic signed [W-1:0] out_data
);
  logic         push, pop, empty, full;
  logic [W-1:0] head;

  assign push = valid && capture && !in_skip;
  assign pop  = valid && replay && !in_pad && !cold && !empty;

  iter_fifo #(.W(W), .DEPTH(DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n), .flush(cold && replay && valid), .push(push), .din(in_data),
    .pop(pop), .dout(head), .empty(empty), .full(full)
  );

  // The capture never overfills the FIFO.
  a_no_overfill: assert property (@(posedge clk) !(push && full));

  always_ff @(posedge clk) begin
    if (!replay)                 out_data <= in_data;
    else if (cold)               out_data <= '0;
    else if (in_pad)             out_data <= w_n;
    else if (empty)              out_data <= '0;
    else                         out_data <= head;
  end
endmodule
