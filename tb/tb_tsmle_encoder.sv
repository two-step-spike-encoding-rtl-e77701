// tb_tsmle_encoder: all 256 patterns of 8 time steps. Expected: one slot
// holding the spike count when it is at most 3, else two 4-step slots when
// both halves hold at most 3, else four 2-step slots. Levels must add up to
// the spike count and unused slots must be 0.
module tb_tsmle_encoder;
  import snn_pkg::*;
  logic [7:0] train;
  level_t     level [MAX_SLOTS];
  logic [2:0] nslot;
  int checks = 0, failures = 0;

  tsmle_encoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < 256; p++) begin
      automatic int pc = $countones(p[7:0]);
      automatic int lo = $countones(p[3:0]), hi = $countones(p[7:4]);
      automatic int en; automatic int ev [4];
      if (pc <= 3) begin en = 1; ev = '{pc, 0, 0, 0}; end
      else if (lo <= 3 && hi <= 3) begin en = 2; ev = '{lo, hi, 0, 0}; end
      else begin
        en = 4;
        for (int q = 0; q < 4; q++) ev[q] = $countones(p[2*q +: 2]);
      end
      train = 8'(p);
      #1;
      checks++;
      if (int'(nslot) != en) failures++;
      for (int s = 0; s < 4; s++) begin
        checks++;
        if (int'(level[s]) != ev[s]) begin
          failures++;
          if (failures < 10) $display("p=%b slot %0d got %0d exp %0d", p[7:0], s, level[s], ev[s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
