// omem: output memory of the SNN core.
//
// After a full time window the thresholding unit's spike counts of one
// output position (NCOLS channels, DATA_BITS each, channel 0 in the low
// bits) are written as one word at address (cg * ho + oy) * wo + ox. The
// host reads them back, e.g. to load them as the next layer's input.
// Timing: synchronous write (core side) and read (host side, data one cycle
// after 're'). The depth is this design's choice.
module omem
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = OMEM_DEPTH,
  parameter int unsigned NCOLS = COLS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [AW-1:0]               waddr,
  input  logic [NCOLS*DATA_BITS-1:0]  wdata,
  input  logic                        re,
  input  logic [AW-1:0]               raddr,
  output logic [NCOLS*DATA_BITS-1:0]  rdata
);
  logic [NCOLS*DATA_BITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
