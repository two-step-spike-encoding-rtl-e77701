// tb_sgs_unit: prediction and lookup of spike generation skipping.
// Random receptive fields (random length, sparse counts) are streamed for 4
// rows and committed to random map positions; the testbench keeps its own
// map, setting a flag when the field's average count is below the
// threshold (sum < th * size). Lookups at random addresses must then return
// skip = flag and req = valid and not skip, and nothing is skipped while
// 'en' is low. Rows with row_valid = 0 must leave the map unchanged.
module tb_sgs_unit;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 1;
  logic [7:0] sgs_th = 0;
  logic [15:0] rf_size = 0;
  logic acc_clr = 0, acc_en = 0, commit = 0;
  logic [DATA_BITS-1:0] cnt_in [ROWS];
  logic [9:0] map_addr = 0, lk_addr = 0;
  logic [ROWS-1:0] row_valid = '1, lk_valid = '1, skip, req;
  bit model [1024];
  int checks = 0, failures = 0;

  sgs_unit #(.NROWS(ROWS), .DEPTH(1024)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_skip = 0, n_keep = 0;
    foreach (model[i]) model[i] = 0;
    for (int r = 0; r < ROWS; r++) cnt_in[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 600; g++) begin
      automatic int len = 1 + $urandom % 30;
      automatic int sum [ROWS] = '{0, 0, 0, 0};
      automatic int base = $urandom % 1020;
      sgs_th = 8'(1 + $urandom % 4);
      rf_size = 16'(len);
      row_valid = ($urandom % 5 == 0) ? ROWS'($urandom) : '1;
      @(negedge clk); acc_clr = 1;
      @(negedge clk); acc_clr = 0;
      for (int i = 0; i < len; i++) begin
        for (int r = 0; r < ROWS; r++) begin
          cnt_in[r] = ($urandom % 3 == 0) ? DATA_BITS'($urandom % 8) : '0;
          sum[r] += cnt_in[r];
        end
        acc_en = 1;
        @(negedge clk);
        acc_en = 0;
        if ($urandom % 3 == 0) @(negedge clk);   // gaps between values
      end
      map_addr = 10'(base); commit = 1;
      @(negedge clk); commit = 0;
      for (int r = 0; r < ROWS; r++) if (row_valid[r]) begin
        model[base + r] = (sum[r] < int'(sgs_th) * len);
        if (model[base + r]) n_skip++; else n_keep++;
      end
      // lookups
      repeat (4) begin
        automatic int a = $urandom % 1020;
        en = ($urandom % 4 != 0);
        lk_addr = 10'(a); lk_valid = ROWS'($urandom);
        #1;
        for (int r = 0; r < ROWS; r++) begin
          automatic bit s = en && lk_valid[r] && model[a + r];
          checks++;
          if (skip[r] != s || req[r] != (lk_valid[r] && !s)) begin
            failures++;
            if (failures < 10) $display("lookup %0d row %0d: skip %0d exp %0d", a, r, skip[r], s);
          end
        end
        @(negedge clk);
      end
    end
    checks++;
    if (n_skip == 0 || n_keep == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
