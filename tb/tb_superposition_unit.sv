// tb_superposition_unit: random 8-bit values for time windows of 16, 64 and
// 256 steps. Every generated step is compared with the eigen-train rule
// (step t carries a spike when bit m-1-k of the value is 1, k being the
// trailing ones of t), and the spikes of the whole window must add up to the
// value itself.
module tb_superposition_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       init = 0;
  logic [3:0] m_cfg = 4'd8;
  logic [7:0] blk = 0, din = 0, train;
  int checks = 0, failures = 0;

  superposition_unit #(.M(8), .LANES(8)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_spike(int v, int m, int t);
    int k = 0;
    while (k < m && ((t >> k) & 1) == 1) k++;
    return (k < m) ? ((v >> (m - 1 - k)) & 1) : 0;
  endfunction

  initial begin
    int ms [3] = '{4, 6, 8};
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (ms[i]) begin
      automatic int m = ms[i];
      @(negedge clk); m_cfg = 4'(m); init = 1;
      @(negedge clk); init = 0;
      for (int n = 0; n < 40; n++) begin
        automatic int v = (n == 0) ? (1 << m) - 1 : (n == 1) ? 0 : int'($urandom % (1 << m));
        automatic int tot = 0;
        din = 8'(v);
        for (int b = 0; b < (1 << (m - 3)); b++) begin
          blk = 8'(b);
          #1;
          for (int l = 0; l < 8; l++) begin
            checks++;
            if (int'(train[l]) != ref_spike(v, m, b * 8 + l)) begin
              failures++;
              if (failures < 10) $display("m=%0d v=%0d t=%0d got %0d", m, v, b * 8 + l, train[l]);
            end
            tot += train[l];
          end
        end
        checks++;
        if (tot != v) begin failures++; $display("m=%0d v=%0d total %0d", m, v, tot); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
