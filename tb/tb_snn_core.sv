// tb_snn_core: end-to-end test of the SNN core at its default parameters.
//
// Runs several convolution layers through the core, each with its own
// configuration (time windows of 16, 64 and 256 steps, delayed-threshold
// intervals of 8 to 32 steps, sparsity boosting and spike generation
// skipping on and off), and compares every OMEM word with a reference model
// written here from the encoding rules directly: eigen-train spike positions
// from the trailing ones of the time index, sparsity boosting on integer
// tiles, a per-interval partial sum of weight x spike count, floor division
// by theta_DT, saturation to 8 bits, and the receptive-field average test for
// skipping. It also predicts the exact cycle count of each run from the same
// reference (TS-MLE slots and SLCS cycles) and checks it. Each mechanism of
// the design is counted and must occur at least once: boosted values,
// skipped rows, fully skipped row groups, dense (2-slot) and 4-slot TS-MLE
// groups, SLCS slots shorter than 3 cycles, empty SLCS groups, multi-spike
// thresholding, count saturation, partially filled row groups.
module tb_snn_core;
  import snn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  cfg_t cfg;
  logic busy, done;
  logic imem_we = 1'b0; logic [11:0] imem_waddr = '0; logic [7:0] imem_wdata = '0;
  logic wmem_we = 1'b0; logic [10:0] wmem_waddr = '0; logic [63:0] wmem_wdata = '0;
  logic omem_re = 1'b0; logic [9:0]  omem_raddr = '0; logic [63:0] omem_rdata;

  snn_core dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters (observed in the design) ----------------
  int n_sb = 0, n_skip_row = 0, n_skip_grp = 0, n_dense2 = 0, n_dense4 = 0;
  int n_short = 0, n_empty = 0, n_multi = 0, n_partial = 0, n_sat = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.ld) for (int r = 0; r < ROWS; r++)
      if (dut.act[r] && dut.sb_changed[r]) n_sb++;
    if (dut.th_clr) begin
      for (int r = 0; r < ROWS; r++) if (dut.sgs_skip[r]) n_skip_row++;
      if (dut.sgs_req == '0) n_skip_grp++;
      if (dut.row_valid != '1) n_partial++;
    end
    if (dut.slcs_load) begin
      automatic int any = 0;
      for (int r = 0; r < ROWS; r++) if (dut.act[r]) begin
        if (dut.nslot[r] == 3'd2) n_dense2++;
        if (dut.nslot[r] == 3'd4) n_dense4++;
        for (int s = 0; s < MAX_SLOTS; s++) if (dut.levels[r][s] != 0) any = 1;
      end
      if (!any) n_empty++;
      else begin
        automatic int short_slot = 0;
        for (int s = 0; s < MAX_SLOTS; s++) begin
          automatic int mx = 0;
          for (int r = 0; r < ROWS; r++) if (dut.levels[r][s] > mx) mx = dut.levels[r][s];
          if (mx == 1 || mx == 2) short_slot = 1;
        end
        if (short_slot) n_short++;
      end
    end
    if (dut.th_step && dut.th_multi != '0) n_multi++;
  end

  // ---------------- reference model ----------------
  function automatic int eig_spike(int v, int m, int t);
    int k = 0;
    while (k < m && ((t >> k) & 1) == 1) k++;
    if (k >= m) return 0;
    return (v >> (m - 1 - k)) & 1;
  endfunction

  function automatic int sb_ref(int v, int m, bit en);
    int res = v;
    if (!en) return v;
    for (int bp = 0; bp < m / 4; bp++) begin
      int t0 = (v >> (2 * bp)) % 4;
      int t1 = (v >> (2 * bp + 2)) % 4;
      int t2 = (v >> (2 * bp + 4)) % 4;
      int nt = t0;
      if (t1 != 0) nt = t0 / 2;
      if (t2 != 0) nt = 0;
      res = res - (t0 << (2 * bp)) + (nt << (2 * bp));
    end
    return res;
  endfunction

  // TS-MLE reference: returns number of slots, fills lv
  function automatic int tsmle_ref(int spikes[8], output int lv[4]);
    int c8 = 0, h[2] = '{0, 0}, q[4] = '{0, 0, 0, 0};
    for (int i = 0; i < 8; i++) begin
      c8 += spikes[i]; h[i / 4] += spikes[i]; q[i / 2] += spikes[i];
    end
    lv = '{0, 0, 0, 0};
    if (c8 <= 3) begin lv[0] = c8; return 1; end
    if (h[0] <= 3 && h[1] <= 3) begin lv[0] = h[0]; lv[1] = h[1]; return 2; end
    lv = q;
    return 4;
  endfunction

  int img [4096];
  int wgt [16][8][256][3][3];  // [cg][co][ci][ky][kx]

  task automatic hw_write_imem(int a, int v);
    @(negedge clk); imem_we = 1; imem_waddr = 12'(a); imem_wdata = 8'(v);
    @(negedge clk); imem_we = 0;
  endtask

  task automatic hw_write_wmem(int a, logic [63:0] v);
    @(negedge clk); wmem_we = 1; wmem_waddr = 11'(a); wmem_wdata = v;
    @(negedge clk); wmem_we = 0;
  endtask

  // run one layer; zero_pct = share of zero inputs, vmax = largest input value
  task automatic run_layer(int tw_log2, int dt_log2, bit sb_en, bit sgs_en, int sgs_th,
                           int thres, int ih, int iw, int cin, int k, int cgs,
                           int zero_pct, int vmax, int wlo, int whi);
    int m = tw_log2, ho = ih - k + 1, wo = iw - k + 1;
    int nblk = 1 << (m - 3), dtb = 1 << dt_log2, nint = nblk / dtb;
    int taps = cin * k * k;
    longint exp_cycles, t0, t1;
    int exp_out [16][256][256][8];
    int bval [4096];
    // data
    for (int a = 0; a < ih * iw * cin; a++) begin
      img[a] = ($urandom % 100 < zero_pct) ? 0 : 1 + $urandom % vmax;
      if (img[a] >= (1 << m)) img[a] = (1 << m) - 1;
      bval[a] = sb_ref(img[a], m, sb_en);
      hw_write_imem(a, img[a]);
    end
    for (int g = 0; g < cgs; g++)
      for (int ci = 0; ci < cin; ci++)
        for (int ky = 0; ky < k; ky++)
          for (int kx = 0; kx < k; kx++) begin
            logic [63:0] word;
            for (int c = 0; c < 8; c++) begin
              wgt[g][c][ci][ky][kx] = wlo + int'($urandom % (whi - wlo + 1));
              word[c*8 +: 8] = 8'(wgt[g][c][ci][ky][kx]);
            end
            hw_write_wmem(((g * cin + ci) * k + ky) * k + kx, word);
          end
    // reference outputs and cycle count
    exp_cycles = 1 + 1;                       // INIT, DONE
    if (sgs_en) exp_cycles += longint'(ho) * ((wo + 3) / 4) * (2 + 2 * taps);
    for (int g = 0; g < cgs; g++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox0 = 0; ox0 < wo; ox0 += 4) begin
          bit act [4];
          int any_act = 0;
          exp_cycles += 1 + 4;                // LOOKUP, write-back
          for (int r = 0; r < 4; r++) begin
            int ox = ox0 + r, rsum = 0;
            act[r] = 0;
            if (ox >= wo) continue;
            for (int ci = 0; ci < cin; ci++)
              for (int ky = 0; ky < k; ky++)
                for (int kx = 0; kx < k; kx++)
                  rsum += img[((oy + ky) * iw + ox + kx) * cin + ci];
            act[r] = !(sgs_en && rsum < sgs_th * taps);
            if (act[r]) any_act = 1;
            for (int c = 0; c < 8; c++) begin
              int cnt = 0;
              if (act[r]) for (int b = 0; b < nint; b++) begin
                longint ps = 0;
                for (int ci = 0; ci < cin; ci++)
                  for (int ky = 0; ky < k; ky++)
                    for (int kx = 0; kx < k; kx++) begin
                      int v = bval[((oy + ky) * iw + ox + kx) * cin + ci], ns = 0;
                      for (int t = b * dtb * 8; t < (b + 1) * dtb * 8; t++) ns += eig_spike(v, m, t);
                      ps += longint'(ns) * wgt[g][c][ci][ky][kx];
                    end
                if (ps > 0) cnt += int'(ps / thres);
              end
              if (cnt > 255) begin cnt = 255; n_sat++; end
              exp_out[g][oy][ox][c] = cnt;
            end
          end
          if (any_act) begin
            exp_cycles += longint'(nint) * (1 + 4 + 2 * taps);
            for (int b = 0; b < nblk; b++)
              for (int ci = 0; ci < cin; ci++)
                for (int ky = 0; ky < k; ky++)
                  for (int kx = 0; kx < k; kx++) begin
                    int lv [4][4];
                    int ncyc = 0;
                    for (int r = 0; r < 4; r++) begin
                      int sp [8];
                      int v = act[r] ? bval[((oy + ky) * iw + ox0 + r + kx) * cin + ci] : 0;
                      for (int l = 0; l < 8; l++) sp[l] = eig_spike(v, m, b * 8 + l);
                      void'(tsmle_ref(sp, lv[r]));
                    end
                    for (int s = 0; s < 4; s++) begin
                      int mx = 0;
                      for (int r = 0; r < 4; r++) if (lv[r][s] > mx) mx = lv[r][s];
                      ncyc += mx;
                    end
                    exp_cycles += 1 + ((ncyc == 0) ? 1 : ncyc);
                  end
          end
        end
    // run
    cfg.tw_log2 = 4'(tw_log2); cfg.dt_log2 = 3'(dt_log2); cfg.sb_en = sb_en;
    cfg.sgs_en = sgs_en; cfg.sgs_th = 8'(sgs_th); cfg.thres = 16'(thres);
    cfg.in_h = 8'(ih); cfg.in_w = 8'(iw); cfg.cin = 8'(cin); cfg.ksize = 3'(k);
    cfg.co_groups = 4'(cgs);
    @(negedge clk); start = 1; t0 = cycle;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = cycle;
    checks++;
    if (t1 - t0 != exp_cycles) begin
      failures++;
      $display("cycle count %0d, expected %0d (tw=%0d)", t1 - t0, exp_cycles, 1 << m);
    end
    // compare OMEM
    for (int g = 0; g < cgs; g++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox = 0; ox < wo; ox++) begin
          @(negedge clk); omem_re = 1; omem_raddr = 10'((g * ho + oy) * wo + ox);
          @(negedge clk); omem_re = 0;
          for (int c = 0; c < 8; c++) begin
            checks++;
            if (int'(omem_rdata[c*8 +: 8]) != exp_out[g][oy][ox][c]) begin
              failures++;
              if (failures < 10)
                $display("mismatch cg%0d y%0d x%0d c%0d: got %0d exp %0d", g, oy, ox, c,
                         omem_rdata[c*8 +: 8], exp_out[g][oy][ox][c]);
            end
          end
        end
    $display("layer tw=%0d dt=%0d sb=%0d sgs=%0d %0dx%0dx%0d k%0d: %0d cycles",
             1 << m, 8 << dt_log2, sb_en, sgs_en, ih, iw, cin, k, t1 - t0);
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end else $display("  %-28s %0d", what, n);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // CIFAR-10-like: TW = 16, D = 8, SB + SGS, partially filled row groups
    run_layer(4, 0, 1, 1, 2, 20, 6, 7, 3, 3, 2, 40, 15, -10, 30);
    // ImageNet/CIFAR-100-like: TW = 64, D = 16, SB + SGS with a high threshold
    run_layer(6, 1, 1, 1, 12, 40, 6, 6, 2, 3, 1, 60, 63, -5, 25);
    // TW = 256, D = 32, dense values, SB off, low threshold (saturation)
    run_layer(8, 2, 0, 0, 0, 3, 5, 6, 2, 3, 1, 10, 255, -4, 20);
    // TW = 256, D = 8, SB on, 1x1 kernel
    run_layer(8, 0, 1, 0, 0, 50, 4, 8, 4, 1, 1, 30, 255, -20, 40);
    $display("mechanisms:");
    need("SB changed a value", n_sb);
    need("SGS skipped a row", n_skip_row);
    need("SGS skipped a row group", n_skip_grp);
    need("partially filled row group", n_partial);
    need("TS-MLE 2-slot group", n_dense2);
    need("TS-MLE 4-slot group", n_dense4);
    need("SLCS slot under 3 cycles", n_short);
    need("SLCS empty group", n_empty);
    need("multi-spike thresholding", n_multi);
    need("count saturation", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
