// snn_controller: sequencer of one SNN core for one convolution layer.
//
// It runs the delayed-thresholding loop nest of the paper's process-coding
// figure, with the time axis split into intervals of D = LANES << dt_log2
// steps and the time loop innermost, so that every weight fetched from WMEM
// serves all D steps of an interval:
//
//   [prediction, if sgs_en]  for oy, for ox0 (step NROWS):
//        for ci, ky, kx: read NROWS input counts, add them up per row
//        write the NROWS skip flags into the skipping map
//   for cg, for oy, for ox0 (step NROWS):       one output row group
//     look up the skip flags; clear the spike counters
//     for tb in 0 .. TW/D-1:                      thresholding intervals
//       clear PSUM
//       for ci, ky, kx:
//         read NROWS inputs (active rows only) and one weight word
//         for j in 0 .. 2**dt_log2-1:              LANES-step blocks
//           generate LANES steps per row, TS-MLE, play through SLCS
//       threshold the NROWS rows of PSUM, one row per cycle
//     write the NROWS output words to OMEM
//
// Rows are output positions ox0+r of row oy; columns are output channels
// cg*NCOLS + c. The stride is 1 and there is no padding. Row groups whose
// rows are all predicted silent skip straight to the write-back of zero
// counts. The loop order follows the paper's figure; the prediction pass,
// address layout and state sequence are this design's.
// Cycle cost (no pipelining): prediction 2 cycles per tap plus 2 per group;
// processing per tap 2 cycles + per block (1 + SLCS cycles, at least 1),
// per interval 1 + NROWS cycles, per group 1 + NROWS cycles.
// Handshake: pulse 'start' in S_IDLE with 'cfg' stable until 'done' pulses.
module snn_controller
  import snn_pkg::*;
#(
  parameter int unsigned NROWS  = ROWS,
  parameter int unsigned IMEM_D = IMEM_DEPTH,
  parameter int unsigned WMEM_D = WMEM_DEPTH,
  parameter int unsigned OMEM_D = OMEM_DEPTH,
  parameter int unsigned MAP_D  = MAP_DEPTH,
  localparam int unsigned IAW   = $clog2(IMEM_D),
  localparam int unsigned WAW   = $clog2(WMEM_D),
  localparam int unsigned OAW   = $clog2(OMEM_D),
  localparam int unsigned MAW   = $clog2(MAP_D),
  localparam int unsigned RW    = $clog2(NROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  cfg_t             cfg,
  output logic             busy,
  output logic             done,
  // spike generator
  output logic             etg_init,
  output logic             ld,          // capture IMEM/WMEM read data
  output logic [NROWS-1:0] act,         // rows that generate spikes in this group
  output logic [7:0]       gen_blk,     // LANES-step block index
  output logic             slcs_load,
  input  logic             slcs_done,
  // memories
  output logic [NROWS-1:0] imem_re,
  output logic [IAW-1:0]   imem_raddr [NROWS],
  output logic             wmem_re,
  output logic [WAW-1:0]   wmem_raddr,
  output logic             omem_we,
  output logic [OAW-1:0]   omem_waddr,
  output logic [RW-1:0]    out_row,     // PE row for thresholding / write-back
  // SGS unit
  output logic             sgs_acc_clr,
  output logic             sgs_acc_en,
  output logic             sgs_commit,
  output logic [MAW-1:0]   map_addr,
  output logic [NROWS-1:0] row_valid,
  input  logic [NROWS-1:0] sgs_req,
  // PE array and thresholding unit
  output logic             pe_clr,
  output logic             th_clr,
  output logic             th_step
);
  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_P_GRP, S_P_RD, S_P_ACC, S_P_COMMIT,
    S_LOOKUP, S_INT, S_RD, S_LD, S_GEN, S_ACC, S_TH, S_WR, S_DONE
  } state_t;

  state_t state_q;
  logic [7:0] oy_q, ox0_q, ci_q, tb_q, j_q;
  logic [2:0] ky_q, kx_q;
  logic [3:0] cg_q;
  logic [RW-1:0] r_q;
  logic [NROWS-1:0] act_q;

  // derived layer sizes
  logic [7:0] ho, wo, n_int, dtb;
  assign ho    = cfg.in_h - 8'(cfg.ksize) + 8'd1;
  assign wo    = cfg.in_w - 8'(cfg.ksize) + 8'd1;
  assign dtb   = 8'd1 << cfg.dt_log2;
  assign n_int = 8'(32'd1 << (32'(cfg.tw_log2) - 32'd3 - 32'(cfg.dt_log2)));

  logic last_tap, last_pos, last_grp;
  assign last_tap = (kx_q == cfg.ksize - 3'd1) && (ky_q == cfg.ksize - 3'd1) &&
                    (ci_q == cfg.cin - 8'd1);
  assign last_pos = (32'(ox0_q) + NROWS >= 32'(wo)) && (oy_q == ho - 8'd1);
  assign last_grp = last_pos && (cg_q == cfg.co_groups - 4'd1);

  always_comb begin
    for (int r = 0; r < NROWS; r++) begin
      row_valid[r]  = (32'(ox0_q) + 32'(r) < 32'(wo));
      imem_raddr[r] = IAW'(((32'(oy_q) + 32'(ky_q)) * 32'(cfg.in_w) +
                             32'(ox0_q) + 32'(r) + 32'(kx_q)) * 32'(cfg.cin) + 32'(ci_q));
    end
  end

  assign wmem_raddr = WAW'(((32'(cg_q) * 32'(cfg.cin) + 32'(ci_q)) * 32'(cfg.ksize) +
                            32'(ky_q)) * 32'(cfg.ksize) + 32'(kx_q));
  assign map_addr   = MAW'(32'(oy_q) * 32'(wo) + 32'(ox0_q));
  assign omem_waddr = OAW'((32'(cg_q) * 32'(ho) + 32'(oy_q)) * 32'(wo) + 32'(ox0_q) + 32'(r_q));
  assign gen_blk    = 8'((32'(tb_q) << cfg.dt_log2) + 32'(j_q));
  assign act        = act_q;
  assign out_row    = r_q;

  always_comb begin
    busy        = (state_q != S_IDLE);
    done        = (state_q == S_DONE);
    etg_init    = (state_q == S_INIT);
    sgs_acc_clr = (state_q == S_P_GRP);
    sgs_acc_en  = (state_q == S_P_ACC);
    sgs_commit  = (state_q == S_P_COMMIT);
    imem_re     = (state_q == S_P_RD) ? row_valid :
                  (state_q == S_RD)   ? act_q     : '0;
    wmem_re     = (state_q == S_RD);
    ld          = (state_q == S_LD);
    slcs_load   = (state_q == S_GEN);
    pe_clr      = (state_q == S_INT);
    th_clr      = (state_q == S_LOOKUP);
    th_step     = (state_q == S_TH);
    omem_we     = (state_q == S_WR) && row_valid[r_q];
  end

  // next kernel tap (kx fastest, then ky, then ci) and next output position
  // (ox0 by NROWS, then oy)
  logic [2:0] kx_nx, ky_nx;
  logic [7:0] ci_nx, ox0_nx, oy_nx;
  always_comb begin
    kx_nx = kx_q + 3'd1;
    ky_nx = ky_q;
    ci_nx = ci_q;
    if (kx_q == cfg.ksize - 3'd1) begin
      kx_nx = '0;
      ky_nx = ky_q + 3'd1;
      if (ky_q == cfg.ksize - 3'd1) begin
        ky_nx = '0;
        ci_nx = ci_q + 8'd1;
      end
    end
    ox0_nx = ox0_q + 8'(NROWS);
    oy_nx  = oy_q;
    if (32'(ox0_q) + NROWS >= 32'(wo)) begin
      ox0_nx = '0;
      oy_nx  = (oy_q == ho - 8'd1) ? 8'd0 : oy_q + 8'd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      {oy_q, ox0_q, ci_q, tb_q, j_q} <= '0;
      {ky_q, kx_q} <= '0;
      cg_q  <= '0;
      r_q   <= '0;
      act_q <= '0;
    end else begin
      case (state_q)
        S_IDLE: if (start) state_q <= S_INIT;
        S_INIT: begin
          {oy_q, ox0_q, cg_q} <= '0;
          state_q <= cfg.sgs_en ? S_P_GRP : S_LOOKUP;
        end
        S_P_GRP: begin
          {ci_q, ky_q, kx_q} <= '0;
          state_q <= S_P_RD;
        end
        S_P_RD:  state_q <= S_P_ACC;
        S_P_ACC: begin
          {ci_q, ky_q, kx_q} <= {ci_nx, ky_nx, kx_nx};
          state_q <= last_tap ? S_P_COMMIT : S_P_RD;
        end
        S_P_COMMIT: begin
          {oy_q, ox0_q} <= {oy_nx, ox0_nx};
          state_q <= last_pos ? S_LOOKUP : S_P_GRP;
        end
        S_LOOKUP: begin
          act_q <= sgs_req;
          tb_q  <= '0;
          r_q   <= '0;
          state_q <= (sgs_req == '0) ? S_WR : S_INT;
        end
        S_INT: begin
          {ci_q, ky_q, kx_q} <= '0;
          state_q <= S_RD;
        end
        S_RD: state_q <= S_LD;
        S_LD: begin
          j_q <= '0;
          state_q <= S_GEN;
        end
        S_GEN: state_q <= S_ACC;
        S_ACC: if (slcs_done) begin
          if (j_q != dtb - 8'd1) begin
            j_q <= j_q + 8'd1;
            state_q <= S_GEN;
          end else begin
            {ci_q, ky_q, kx_q} <= {ci_nx, ky_nx, kx_nx};
            state_q <= last_tap ? S_TH : S_RD;
          end
        end
        S_TH: begin
          r_q <= r_q + RW'(1);
          if (32'(r_q) == NROWS - 1) begin
            tb_q <= tb_q + 8'd1;
            state_q <= (tb_q == n_int - 8'd1) ? S_WR : S_INT;
          end
        end
        S_WR: begin
          r_q <= r_q + RW'(1);
          if (32'(r_q) == NROWS - 1) begin
            {oy_q, ox0_q} <= {oy_nx, ox0_nx};
            if (last_pos) cg_q <= cg_q + 4'd1;
            state_q <= last_grp ? S_DONE : S_LOOKUP;
          end
        end
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // configuration rules the sequencer relies on
  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_INIT) |-> (cfg.tw_log2 >= 4'd3 && cfg.tw_log2 <= 4'(DATA_BITS) &&
                             32'(cfg.dt_log2) + 3 <= 32'(cfg.tw_log2) &&
                             cfg.ksize != '0 && cfg.cin != '0 && cfg.co_groups != '0 &&
                             cfg.in_h >= 8'(cfg.ksize) && cfg.in_w >= 8'(cfg.ksize)));
  a_start: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (state_q == S_IDLE));
endmodule
