// snn_core: one SNN core with the two-step spike encoding.
//
// Source encoding happens next to the input memory: each of the NROWS rows
// reads an m-bit value (pixel or spike count), the SB & SGS unit boosts its
// sparsity (sb_unit) and suppresses rows whose neuron is predicted silent
// (sgs_unit), and the superposition unit turns the value into LANES time
// steps of its eigen-train spike train per cycle. Process encoding follows:
// the TS-MLE encoder folds those LANES binary steps into one, two or four
// 2-bit multi-level spikes, and the SLCS unit plays them to the PE array,
// taking only as many cycles per slot as its largest level. Each PE adds its
// column's weight once per spike cycle. After each delayed-thresholding
// interval the thresholding unit divides every partial sum by theta_DT and
// adds the quotient to that neuron's spike count; after the whole time
// window the counts (saturated to DATA_BITS) go to OMEM, ready to be the
// next layer's input. The block structure is the paper's core figure; the
// controller's schedule is described in snn_controller.
//
// Interface: the host fills IMEM and WMEM through their write ports, sets
// 'cfg', pulses 'start', waits for 'done' and reads OMEM. See snn_pkg for the
// configuration fields and snn_controller/imem/wmem/omem for address
// layouts. The host ports stand in for the external interface between
// layers, which the paper only names.
// The nets sb_changed, sgs_skip, nslot, th_multi and slcs_busy are not used
// inside the core; they are kept as named status nets for observation in
// simulation (the end-to-end testbench counts events on them).
module snn_core
  import snn_pkg::*;
#(
  parameter int unsigned NROWS  = ROWS,
  parameter int unsigned NCOLS  = COLS,
  parameter int unsigned IMEM_D = IMEM_DEPTH,
  parameter int unsigned WMEM_D = WMEM_DEPTH,
  parameter int unsigned OMEM_D = OMEM_DEPTH,
  parameter int unsigned MAP_D  = MAP_DEPTH,
  localparam int unsigned IAW   = $clog2(IMEM_D),
  localparam int unsigned WAW   = $clog2(WMEM_D),
  localparam int unsigned OAW   = $clog2(OMEM_D)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  cfg_t                       cfg,
  output logic                       busy,
  output logic                       done,
  // host: input memory load
  input  logic                       imem_we,
  input  logic [IAW-1:0]             imem_waddr,
  input  logic [DATA_BITS-1:0]       imem_wdata,
  // host: weight memory load
  input  logic                       wmem_we,
  input  logic [WAW-1:0]             wmem_waddr,
  input  logic [NCOLS*W_BITS-1:0]    wmem_wdata,
  // host: output memory read
  input  logic                       omem_re,
  input  logic [OAW-1:0]             omem_raddr,
  output logic [NCOLS*DATA_BITS-1:0] omem_rdata
);
  localparam int unsigned MAW = $clog2(MAP_D);
  localparam int unsigned RW  = $clog2(NROWS);

  // controller outputs
  logic             etg_init, ld, slcs_load, slcs_done, slcs_busy;
  logic [NROWS-1:0] act, imem_re, row_valid, sgs_req, sgs_skip, spike;
  logic [7:0]       gen_blk;
  logic [IAW-1:0]   imem_raddr [NROWS];
  logic             wmem_re, omem_we;
  logic [WAW-1:0]   wmem_raddr;
  logic [OAW-1:0]   omem_waddr;
  logic [RW-1:0]    out_row;
  logic             sgs_acc_clr, sgs_acc_en, sgs_commit;
  logic [MAW-1:0]   map_addr;
  logic             pe_clr, th_clr, th_step;

  snn_controller #(
    .NROWS(NROWS), .IMEM_D(IMEM_D), .WMEM_D(WMEM_D), .OMEM_D(OMEM_D), .MAP_D(MAP_D)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .etg_init, .ld, .act, .gen_blk, .slcs_load, .slcs_done,
    .imem_re, .imem_raddr, .wmem_re, .wmem_raddr, .omem_we, .omem_waddr, .out_row,
    .sgs_acc_clr, .sgs_acc_en, .sgs_commit, .map_addr, .row_valid, .sgs_req,
    .pe_clr, .th_clr, .th_step
  );

  // ---------------- memories ----------------
  logic [DATA_BITS-1:0]    imem_rdata [NROWS];
  logic [NCOLS*W_BITS-1:0] wmem_rdata;

  imem #(.DEPTH(IMEM_D), .WIDTH(DATA_BITS), .NRD(NROWS)) u_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .re(imem_re), .raddr(imem_raddr), .rdata(imem_rdata)
  );

  wmem #(.DEPTH(WMEM_D), .NCOLS(NCOLS)) u_wmem (
    .clk, .we(wmem_we), .waddr(wmem_waddr), .wdata(wmem_wdata),
    .re(wmem_re), .raddr(wmem_raddr), .rdata(wmem_rdata)
  );

  // ---------------- SB & SGS unit ----------------
  sgs_unit #(.NROWS(NROWS), .DEPTH(MAP_D)) u_sgs (
    .clk, .rst_n,
    .en       (cfg.sgs_en),
    .sgs_th   (cfg.sgs_th),
    .rf_size  (16'(cfg.cin) * 16'(cfg.ksize) * 16'(cfg.ksize)),
    .acc_clr  (sgs_acc_clr),
    .acc_en   (sgs_acc_en),
    .cnt_in   (imem_rdata),
    .commit   (sgs_commit),
    .map_addr (map_addr),
    .row_valid(row_valid),
    .lk_addr  (map_addr),
    .lk_valid (row_valid),
    .skip     (sgs_skip),
    .req      (sgs_req)
  );

  logic [DATA_BITS-1:0] sb_out     [NROWS];
  logic [NROWS-1:0]     sb_changed;
  logic [DATA_BITS-1:0] val_q      [NROWS];
  logic signed [W_BITS-1:0] w_q    [NCOLS];

  for (genvar r = 0; r < NROWS; r++) begin : g_row
    sb_unit #(.M(DATA_BITS)) u_sb (
      .en(cfg.sb_en), .m_cfg(cfg.tw_log2), .din(imem_rdata[r]),
      .dout(sb_out[r]), .changed(sb_changed[r])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NROWS; r++) val_q[r] <= '0;
      for (int c = 0; c < NCOLS; c++) w_q[c] <= '0;
    end else if (ld) begin
      for (int r = 0; r < NROWS; r++) val_q[r] <= act[r] ? sb_out[r] : '0;
      for (int c = 0; c < NCOLS; c++) w_q[c] <= wmem_rdata[c*W_BITS +: W_BITS];
    end
  end

  // ---------------- superposition unit and TS-MLE encoder ----------------
  logic [LANES-1:0] train     [NROWS];
  level_t           levels    [NROWS][MAX_SLOTS];
  logic [2:0]       nslot     [NROWS];

  for (genvar r = 0; r < NROWS; r++) begin : g_gen
    superposition_unit #(.M(DATA_BITS), .LANES(LANES)) u_sup (
      .clk, .rst_n, .init(etg_init), .m_cfg(cfg.tw_log2), .blk(gen_blk),
      .din(val_q[r]), .train(train[r])
    );
    tsmle_encoder u_tsmle (
      .train(train[r]), .level(levels[r]), .nslot(nslot[r])
    );
  end

  // ---------------- SLCS, PE array, thresholding ----------------
  slcs_unit #(.NROWS(NROWS)) u_slcs (
    .clk, .rst_n, .load(slcs_load), .level_in(levels),
    .spike, .busy(slcs_busy), .done(slcs_done)
  );

  logic signed [PSUM_BITS-1:0] psum  [NROWS][NCOLS];
  logic [DATA_BITS-1:0]        count [NROWS][NCOLS];
  logic [NCOLS-1:0]            th_multi;

  pe_array #(.NROWS(NROWS), .NCOLS(NCOLS)) u_pe (
    .clk, .rst_n, .clr(pe_clr), .spike, .weight(w_q), .psum
  );

  thres_unit #(.NROWS(NROWS), .NCOLS(NCOLS)) u_th (
    .clk, .rst_n, .clr(th_clr), .step(th_step), .row(out_row),
    .thres(cfg.thres), .psum, .count, .multi(th_multi)
  );

  // ---------------- output memory ----------------
  logic [NCOLS*DATA_BITS-1:0] omem_wdata;
  always_comb begin
    for (int c = 0; c < NCOLS; c++) omem_wdata[c*DATA_BITS +: DATA_BITS] = count[out_row][c];
  end

  omem #(.DEPTH(OMEM_D), .NCOLS(NCOLS)) u_omem (
    .clk, .we(omem_we), .waddr(omem_waddr), .wdata(omem_wdata),
    .re(omem_re), .raddr(omem_raddr), .rdata(omem_rdata)
  );
endmodule
