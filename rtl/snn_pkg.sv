// snn_pkg: sizes, types and the layer configuration shared by the SNN core.
//
// The core encodes m-bit input values (pixels or spike counts of the previous
// layer) into eigen-train spike trains, compresses them on the time axis into
// 2-bit multi-level spikes, and accumulates weights in a 4 x 8 PE array with
// delayed thresholding. The sizes below are the ones the design is built
// around: 8-bit input data and 8 one-bit eigen-train registers per bit (the
// spike generator figure), 4 PE rows by 8 PE columns (the core figure),
// 2-bit spike levels 0..3 (the process-coding text). Everything else
// (memory depths, weight, partial-sum and configuration widths) is this
// design's own choice.
package snn_pkg;

  // Input data width m (bits per pixel / spike count); time window is 2**m.
  localparam int unsigned DATA_BITS = 8;
  // Time steps produced by the spike generator per cycle (8 registers per ETG).
  localparam int unsigned LANES     = 8;
  // PE array: rows carry spikes (one output position each), columns carry
  // weights (one output channel each).
  localparam int unsigned ROWS      = 4;
  localparam int unsigned COLS      = 8;
  // Multi-level spike: levels 0..3, and at most 4 slots per 8 time steps.
  localparam int unsigned LVL_BITS  = 2;
  localparam int unsigned MAX_SLOTS = 4;
  // Datapath widths (assumed).
  localparam int unsigned W_BITS    = 8;   // signed weight
  localparam int unsigned PSUM_BITS = 32;  // signed partial sum
  localparam int unsigned CNT_BITS  = 16;  // output spike counter inside the thresholding unit
  localparam int unsigned TH_BITS   = 16;  // delayed threshold theta_DT

  // Memory depths (assumed).
  localparam int unsigned IMEM_DEPTH = 4096;  // words of DATA_BITS
  localparam int unsigned WMEM_DEPTH = 2048;  // words of COLS*W_BITS
  localparam int unsigned OMEM_DEPTH = 1024;  // words of COLS*DATA_BITS
  localparam int unsigned MAP_DEPTH  = 1024;  // skipping-map entries (output positions)

  typedef logic [LVL_BITS-1:0] level_t;

  // Layer configuration, written by the host before start.
  typedef struct packed {
    logic [3:0]         tw_log2;    // time window = 2**tw_log2 steps, 3..DATA_BITS; also the data width in use
    logic [2:0]         dt_log2;    // delayed-threshold interval = LANES << dt_log2 steps (<= time window)
    logic               sb_en;      // sparsity boosting on
    logic               sgs_en;     // spike generation skipping on
    logic [7:0]         sgs_th;     // SGS threshold on the average spike count of a receptive field
    logic [TH_BITS-1:0] thres;      // theta_DT, divisor of the thresholding unit
    logic [7:0]         in_h;       // input feature map height
    logic [7:0]         in_w;       // input feature map width
    logic [7:0]         cin;        // input channels
    logic [2:0]         ksize;      // square kernel size (stride 1, no padding)
    logic [3:0]         co_groups;  // output channels / COLS
  } cfg_t;

endpackage
