// tb_thres_unit: random partial sums (negative, small and large) and
// thresholds. After each step on row r, counter (r, c) must have grown by
// floor(psum / theta) for positive psum (0 otherwise, and 0 for theta = 0);
// the outputs are the counters saturated at 255; 'multi' flags quotients
// above 1. 'clr' zeroes everything.
module tb_thres_unit;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, step = 0;
  logic [1:0] row = 0;
  logic [TH_BITS-1:0] thres = 1;
  logic signed [PSUM_BITS-1:0] psum [ROWS][COLS];
  logic [DATA_BITS-1:0] count [ROWS][COLS];
  logic [COLS-1:0] multi;
  longint model [ROWS][COLS];
  int checks = 0, failures = 0;

  thres_unit #(.NROWS(ROWS), .NCOLS(COLS)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      psum[r][c] = '0; model[r][c] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      clr = ($urandom % 40 == 0);
      step = 1;
      row = 2'($urandom);
      thres = ($urandom % 30 == 0) ? '0 : TH_BITS'(1 + $urandom % 200);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          psum[r][c] = ($urandom % 4 == 0) ? -PSUM_BITS'($urandom % 1000) : PSUM_BITS'($urandom % 2000);
      #1;
      for (int c = 0; c < COLS; c++) begin
        automatic longint q = (psum[row][c] > 0 && thres != 0) ? longint'(psum[row][c]) / longint'(thres) : 0;
        checks++;
        if (multi[c] != (q > 1)) failures++;
      end
      @(posedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          if (clr) model[r][c] = 0;
          else if (r == int'(row) && psum[r][c] > 0 && thres != 0)
            model[r][c] += longint'(psum[r][c]) / longint'(thres);
      @(negedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          automatic longint e = (model[r][c] > 255) ? 255 : model[r][c];
          checks++;
          if (longint'(count[r][c]) != e) begin
            failures++;
            if (failures < 10) $display("i=%0d r%0d c%0d got %0d exp %0d", i, r, c, count[r][c], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
