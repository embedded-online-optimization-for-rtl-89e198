// coef_memory: one lane's bank of matrix memory blocks. Column j of the bank
// is the memory block that feeds multiplier j of the dot product; row r holds
// the matrix row of the r-th component computed by this lane.
//
// Written one word per cycle through (we, wrow, wcol, wdata) by the host,
// which loads the offline-computed matrices before a solve. Read a whole row
// per cycle: rd_data shows row rd_row one cycle after rd_en (synchronous
// read, as in block RAM). ROWS = ceil(n/P) is the published memory depth;
// COLS is the number of blocks (n for the iteration matrix, n_x or n_x + 1
// for the set-up matrix).
module coef_memory #(
  parameter int W    = 32,
  parameter int ROWS = 40,
  parameter int COLS = 40
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [15:0]               wrow,
  input  logic [15:0]               wcol,
  input  logic [W-1:0]              wdata,
  input  logic                      rd_en,
  input  logic [$clog2(ROWS+1)-1:0] rd_row,
  output logic [W-1:0]              rd_data [COLS]
);
  localparam int AW = $clog2(ROWS + 1);

  // One single-port-write, single-port-read memory per column, so each
  // multiplier has its own block, as in the published datapath.
  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [W-1:0] mem [ROWS];

    always_ff @(posedge clk) begin
      if (we && (wrow < 16'(ROWS)) && (wcol == 16'(c)))
        mem[wrow[AW-1:0]] <= wdata;
    end

    always_ff @(posedge clk) begin
      if (rd_en && (int'(rd_row) < ROWS)) rd_data[c] <= mem[rd_row];
    end
  end
endmodule
