// tb_etg: checks eigen-train generators for bits 0, 3 and 7 against the
// spike-position rule written as "step t belongs to bit m-1-k, where k is the
// number of trailing ones of t", for every time window 8..256 and every
// 8-step block, with the input bit on and off. Also checks that bit n gives
// 2**n spikes over the window when m > n.
module tb_etg;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic       init = 0;
  logic [3:0] m_cfg = 4'd8;
  logic [7:0] blk = 0;
  logic       bit_in = 0;
  logic [7:0] tr0, tr3, tr7;
  int checks = 0, failures = 0;

  etg #(.LANES(8), .BIT(0)) u0 (.clk, .rst_n, .init, .m_cfg, .blk, .bit_in, .train(tr0));
  etg #(.LANES(8), .BIT(3)) u3 (.clk, .rst_n, .init, .m_cfg, .blk, .bit_in, .train(tr3));
  etg #(.LANES(8), .BIT(7)) u7 (.clk, .rst_n, .init, .m_cfg, .blk, .bit_in, .train(tr7));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit owner_is(int t, int m, int n);
    int k = 0;
    while (k < m && ((t >> k) & 1) == 1) k++;
    return (k < m) && (m - 1 - k == n);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 3; m <= 8; m++) begin
      automatic int tot0 = 0, tot3 = 0, tot7 = 0;
      @(negedge clk); m_cfg = 4'(m); init = 1;
      @(negedge clk); init = 0;
      for (int b = 0; b < (1 << (m - 3)); b++)
        for (int bi = 0; bi < 2; bi++) begin
          blk = 8'(b); bit_in = bi[0];
          #1;
          for (int l = 0; l < 8; l++) begin
            automatic int t = b * 8 + l;
            checks += 3;
            if (tr0[l] != (bi[0] && owner_is(t, m, 0))) failures++;
            if (tr3[l] != (bi[0] && owner_is(t, m, 3))) failures++;
            if (tr7[l] != (bi[0] && owner_is(t, m, 7))) begin
              failures++;
              if (failures < 10) $display("m=%0d t=%0d bit7 got %0d", m, t, tr7[l]);
            end
            if (bi) begin tot0 += tr0[l]; tot3 += tr3[l]; tot7 += tr7[l]; end
          end
        end
      checks += 3;
      if (tot0 != 1) failures++;
      if (tot3 != ((m > 3) ? 8 : 0)) failures++;
      if (tot7 != ((m > 7) ? 128 : 0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
