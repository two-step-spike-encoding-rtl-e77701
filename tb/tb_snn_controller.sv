// tb_snn_controller: the sequencer alone, with the datapath replaced by the
// testbench. SLCS completion comes after a random number of cycles, and the
// SGS request bits come from a random skip map held by the testbench. The
// testbench builds the expected event streams from the loop nest written out
// in plain nested loops and compares, in order:
//   prediction reads  (IMEM addresses of the valid rows),
//   processing reads  (IMEM addresses of the active rows, WMEM address),
//   spike-generation block indices,
//   thresholding steps (row index) and OMEM writes (address).
// It also checks the number of PSUM clears and that 'done' comes once.
module tb_snn_controller;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  cfg_t cfg;
  logic busy, done, etg_init, ld, slcs_load, slcs_done, wmem_re, omem_we;
  logic sgs_acc_clr, sgs_acc_en, sgs_commit, pe_clr, th_clr, th_step;
  logic [ROWS-1:0] act, imem_re, row_valid, sgs_req;
  logic [7:0] gen_blk;
  logic [11:0] imem_raddr [ROWS];
  logic [10:0] wmem_raddr;
  logic [9:0] omem_waddr, map_addr;
  logic [1:0] out_row;
  int checks = 0, failures = 0;

  snn_controller dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit skipmap [1024];
  always_comb
    for (int r = 0; r < ROWS; r++)
      sgs_req[r] = row_valid[r] && !(cfg.sgs_en && skipmap[int'(map_addr) + r]);

  // SLCS stand-in: done after 1..4 cycles
  int slcs_cnt = -1;
  always @(posedge clk) begin
    if (slcs_load) slcs_cnt <= 1 + int'($urandom % 4);
    else if (slcs_cnt > 0) slcs_cnt <= slcs_cnt - 1;
  end
  assign slcs_done = (slcs_cnt == 1);

  // observed and expected streams
  longint obs_pred [$], obs_rd [$], obs_blk [$], obs_th [$], obs_wr [$];
  longint exp_pred [$], exp_rd [$], exp_blk [$], exp_th [$], exp_wr [$];
  int n_clr = 0, n_done = 0;

  always @(posedge clk) if (rst_n) begin
    if (imem_re != '0 && !wmem_re)
      for (int r = 0; r < ROWS; r++) if (imem_re[r]) obs_pred.push_back(imem_raddr[r]);
    if (wmem_re) begin
      automatic longint k = wmem_raddr;
      for (int r = 0; r < ROWS; r++) k = k * 8192 + (imem_re[r] ? 4096 + longint'(imem_raddr[r]) : 0);
      obs_rd.push_back(k);
    end
    if (slcs_load) obs_blk.push_back(gen_blk);
    if (th_step) obs_th.push_back(out_row);
    if (omem_we) obs_wr.push_back(omem_waddr);
    if (pe_clr) n_clr++;
    if (done) n_done++;
  end

  task automatic compare(string name, ref longint o [$], ref longint e [$]);
    checks++;
    if (o.size() != e.size()) begin
      failures++;
      $display("%s: %0d events, expected %0d", name, o.size(), e.size());
    end
    for (int i = 0; i < o.size() && i < e.size(); i++) begin
      checks++;
      if (o[i] != e[i]) begin
        failures++;
        if (failures < 10) $display("%s[%0d] = %0d, expected %0d", name, i, o[i], e[i]);
      end
    end
    o.delete(); e.delete();
  endtask

  task automatic run(int m, int dtl, bit sgs, int ih, int iw, int cin, int k, int cgs);
    int ho = ih - k + 1, wo = iw - k + 1;
    int nint = (1 << (m - 3)) >> dtl, dtb = 1 << dtl, clr_exp = 0;
    foreach (skipmap[i]) skipmap[i] = ($urandom % 4 == 0);
    cfg = '0;
    cfg.tw_log2 = 4'(m); cfg.dt_log2 = 3'(dtl); cfg.sgs_en = sgs; cfg.thres = 16'd1;
    cfg.in_h = 8'(ih); cfg.in_w = 8'(iw); cfg.cin = 8'(cin); cfg.ksize = 3'(k);
    cfg.co_groups = 4'(cgs);
    if (sgs)
      for (int oy = 0; oy < ho; oy++)
        for (int ox0 = 0; ox0 < wo; ox0 += ROWS)
          for (int ci = 0; ci < cin; ci++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++)
                for (int r = 0; r < ROWS; r++)
                  if (ox0 + r < wo) exp_pred.push_back(((oy + ky) * iw + ox0 + r + kx) * cin + ci);
    for (int g = 0; g < cgs; g++)
      for (int oy = 0; oy < ho; oy++)
        for (int ox0 = 0; ox0 < wo; ox0 += ROWS) begin
          automatic bit actv [ROWS];
          automatic bit any = 0;
          for (int r = 0; r < ROWS; r++) begin
            actv[r] = (ox0 + r < wo) && !(sgs && skipmap[oy * wo + ox0 + r]);
            any |= actv[r];
          end
          if (any)
            for (int b = 0; b < nint; b++) begin
              clr_exp++;
              for (int ci = 0; ci < cin; ci++)
                for (int ky = 0; ky < k; ky++)
                  for (int kx = 0; kx < k; kx++) begin
                    automatic longint key = ((g * cin + ci) * k + ky) * k + kx;
                    for (int r = 0; r < ROWS; r++)
                      key = key * 8192 + (actv[r] ? 4096 + longint'(((oy + ky) * iw + ox0 + r + kx) * cin + ci) : 0);
                    exp_rd.push_back(key);
                    for (int j = 0; j < dtb; j++) exp_blk.push_back(b * dtb + j);
                  end
              for (int r = 0; r < ROWS; r++) exp_th.push_back(r);
            end
          for (int r = 0; r < ROWS; r++)
            if (ox0 + r < wo) exp_wr.push_back((g * ho + oy) * wo + ox0 + r);
        end
    n_clr = 0; n_done = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    compare("prediction reads", obs_pred, exp_pred);
    compare("processing reads", obs_rd, exp_rd);
    compare("block indices", obs_blk, exp_blk);
    compare("threshold steps", obs_th, exp_th);
    compare("omem writes", obs_wr, exp_wr);
    checks += 2;
    if (n_clr != clr_exp) begin failures++; $display("psum clears %0d exp %0d", n_clr, clr_exp); end
    if (n_done != 1) failures++;
  endtask

  initial begin
    foreach (skipmap[i]) skipmap[i] = 0;
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(4, 0, 1, 6, 7, 3, 3, 2);
    run(6, 1, 1, 5, 9, 2, 2, 1);
    run(8, 2, 0, 4, 4, 2, 3, 1);
    run(5, 0, 1, 3, 10, 4, 1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
