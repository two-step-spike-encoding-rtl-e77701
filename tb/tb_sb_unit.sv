// tb_sb_unit: exhaustive test of sparsity boosting for 8-bit data.
// Every input value is tried for data widths m = 4, 6, 8 with boosting on
// and off, against an integer-arithmetic model of the tile rule: a 2-bit
// tile below bit m/2 is halved when the next tile up is non-zero and cleared
// when the tile two places up is non-zero (decided on the original value).
module tb_sb_unit;
  logic       en;
  logic [3:0] m_cfg;
  logic [7:0] din, dout;
  logic       changed;
  int checks = 0, failures = 0;

  sb_unit #(.M(8)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_sb(int v, int m, bit e);
    int res = v;
    if (!e) return v;
    for (int bp = 0; bp < m / 4; bp++) begin
      int t0 = (v / (4 ** bp)) % 4;
      int t1 = (v / (4 ** (bp + 1))) % 4;
      int t2 = (v / (4 ** (bp + 2))) % 4;
      int nt = (t2 != 0) ? 0 : (t1 != 0) ? t0 / 2 : t0;
      res += (nt - t0) * (4 ** bp);
    end
    return res;
  endfunction

  initial begin
    automatic int n_changed = 0;
    for (int e = 0; e < 2; e++)
      for (int m = 4; m <= 8; m += 2)
        for (int v = 0; v < (1 << m); v++) begin
          en = e[0]; m_cfg = 4'(m); din = 8'(v);
          #1;
          checks++;
          if (int'(dout) != ref_sb(v, m, e[0]) || changed != (ref_sb(v, m, e[0]) != v)) begin
            failures++;
            if (failures < 10) $display("m=%0d en=%0d v=%0d: got %0d exp %0d", m, e, v, dout, ref_sb(v, m, e[0]));
          end
          if (changed) n_changed++;
        end
    // fixed examples worked by hand (m = 8): 0x17 -> tile1 (01) != 0 halves tile0 (11 -> 01),
    // tile2 (01) != 0 clears tile0 -> 0x14; tile1 sees tile3 = 00, tile2 = 01 -> halved 01 -> 00: 0x10
    en = 1; m_cfg = 4'd8; din = 8'h17; #1; checks++;
    if (dout != 8'h10) begin failures++; $display("0x17 -> %h", dout); end
    din = 8'h03; #1; checks++;
    if (dout != 8'h03) begin failures++; $display("0x03 -> %h", dout); end
    din = 8'hC3; #1; checks++;            // tile3 != 0 clears tile1 (00), tile1 = 0, tile2 = 0: tile0 kept
    if (dout != 8'hC3) begin failures++; $display("0xC3 -> %h", dout); end
    din = 8'h0F; #1; checks++;            // tile1 (11) halves tile0 -> 01; tile1: tile2 = 0, tile3 = 0 -> kept
    if (dout != 8'h0D) begin failures++; $display("0x0F -> %h", dout); end
    checks++;
    if (n_changed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
