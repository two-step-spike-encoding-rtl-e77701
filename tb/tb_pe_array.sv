// tb_pe_array: random row spikes and column weights on the 4 x 8 array; PE
// (r, c) must hold the sum of weight c over the cycles in which row r spiked.
module tb_pe_array;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0;
  logic [ROWS-1:0] spike = '0;
  logic signed [W_BITS-1:0] weight [COLS];
  logic signed [PSUM_BITS-1:0] psum [ROWS][COLS];
  longint model [ROWS][COLS];
  int checks = 0, failures = 0;

  pe_array #(.NROWS(ROWS), .NCOLS(COLS)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < COLS; c++) weight[c] = '0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) model[r][c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      clr = ($urandom % 100 == 0);
      spike = ROWS'($urandom);
      for (int c = 0; c < COLS; c++) weight[c] = W_BITS'($urandom);
      @(posedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          if (clr) model[r][c] = 0;
          else if (spike[r]) model[r][c] += weight[c];
      @(negedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (longint'(psum[r][c]) != model[r][c]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
