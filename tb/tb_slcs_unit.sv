// tb_slcs_unit: random multi-level spike groups for 4 rows (many zeros so
// that short and empty slots occur). For each group it checks, cycle by
// cycle, that row r spikes in cycle c of slot s exactly when its level
// exceeds c; that each slot lasts max-over-rows(level) cycles, so the whole
// group takes the sum of the slot maxima (the spike-level clock skip); that
// 'busy' covers exactly those cycles; and that 'done' comes in the last one
// (or in the first cycle after 'load' for an all-zero group).
module tb_slcs_unit;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       load = 0;
  level_t     level_in [ROWS][MAX_SLOTS];
  logic [ROWS-1:0] spike;
  logic       busy, done;
  int checks = 0, failures = 0;

  slcs_unit #(.NROWS(ROWS)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_short = 0, n_empty = 0;
    for (int r = 0; r < ROWS; r++) for (int s = 0; s < MAX_SLOTS; s++) level_in[r][s] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 3000; g++) begin
      automatic int lv [ROWS][MAX_SLOTS];
      automatic int exp_spk [$];   // expected spike vectors, one per cycle
      automatic int ncyc = 0;
      for (int r = 0; r < ROWS; r++)
        for (int s = 0; s < MAX_SLOTS; s++) begin
          lv[r][s] = ($urandom % 3 == 0) ? int'($urandom % 4) : 0;
          level_in[r][s] = level_t'(lv[r][s]);
        end
      for (int s = 0; s < MAX_SLOTS; s++) begin
        automatic int mx = 0;
        for (int r = 0; r < ROWS; r++) if (lv[r][s] > mx) mx = lv[r][s];
        if (mx == 1 || mx == 2) n_short++;
        for (int c = 0; c < mx; c++) begin
          automatic int v = 0;
          for (int r = 0; r < ROWS; r++) if (lv[r][s] > c) v |= (1 << r);
          exp_spk.push_back(v);
        end
        ncyc += mx;
      end
      if (ncyc == 0) n_empty++;
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      for (int c = 0; c < ((ncyc == 0) ? 1 : ncyc); c++) begin
        checks++;
        if (ncyc == 0) begin
          if (busy || !done || spike != '0) failures++;
        end else begin
          if (!busy || int'(spike) != exp_spk[c] || done != (c == ncyc - 1)) begin
            failures++;
            if (failures < 10) $display("group %0d cycle %0d: busy %0d spike %b exp %b done %0d",
                                        g, c, busy, spike, exp_spk[c][ROWS-1:0], done);
          end
        end
        @(negedge clk);
      end
      checks++;
      if (busy || done) begin failures++; $display("group %0d: still busy after %0d cycles", g, ncyc); end
      // random idle gap
      repeat ($urandom % 2) @(negedge clk);
    end
    checks++;
    if (n_short == 0 || n_empty == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
