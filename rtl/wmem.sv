// wmem: weight memory of the SNN core.
//
// One word holds NCOLS signed weights, one for each PE column (output
// channel), for one (output-channel group, ci, ky, kx) tap at address
// ((cg * cin + ci) * k + ky) * k + kx. Written by the host, read by the
// core. With delayed thresholding one fetched word serves every time step
// of the interval, which is where the weight reuse comes from.
// Timing: synchronous write and read; read data one cycle after 're'.
// The depth is this design's choice.
module wmem
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = WMEM_DEPTH,
  parameter int unsigned NCOLS = COLS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [AW-1:0]            waddr,
  input  logic [NCOLS*W_BITS-1:0]  wdata,
  input  logic                     re,
  input  logic [AW-1:0]            raddr,
  output logic [NCOLS*W_BITS-1:0]  rdata
);
  logic [NCOLS*W_BITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
