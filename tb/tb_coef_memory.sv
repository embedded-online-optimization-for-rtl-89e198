// tb_coef_memory: fills a 6 x 5 bank word by word in random order, then reads
// rows in random order and checks each whole row one cycle after the read
// request (synchronous read); writes outside the bank are ignored.
module tb_coef_memory;
  localparam int ROWS = 6, COLS = 5;
  logic clk = 0, we = 0, rd_en = 0;
  logic [15:0] wrow, wcol;
  logic [31:0] wdata;
  logic [$clog2(ROWS+1)-1:0] rd_row;
  logic [31:0] rd_data [COLS];
  logic [31:0] model [ROWS][COLS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  coef_memory #(.W(32), .ROWS(ROWS), .COLS(COLS)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      we = 1; wrow = 16'($urandom_range(ROWS, 0)); wcol = 16'($urandom_range(COLS, 0)); wdata = $urandom;
      if (wrow < ROWS && wcol < COLS) model[wrow][wcol] = wdata;
      else if (k < 100) begin wrow = 16'(k % ROWS); wcol = 16'(k % COLS); model[wrow][wcol] = wdata; end
    end
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      @(negedge clk); we = 1; wrow = 16'(r); wcol = 16'(c); wdata = $urandom; model[r][c] = wdata;
    end
    @(negedge clk); we = 1; wrow = 16'(ROWS); wcol = 0; wdata = 32'hdead;  // ignored
    for (int k = 0; k < 60; k++) begin
      int r;
      @(negedge clk);
      we = 0; r = $urandom_range(ROWS - 1, 0); rd_en = 1; rd_row = r[$bits(rd_row)-1:0];
      @(negedge clk);
      rd_en = 0;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (rd_data[c] !== model[r][c]) begin failures++; $display("r%0d c%0d %h exp %h", r, c, rd_data[c], model[r][c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
