// pe_array: NROWS x NCOLS processing elements (4 x 8 in the core figure).
//
// Spikes run along the rows: all PEs of row r see the spike of row r, which
// belongs to one output position. Weights run down the columns: all PEs of
// column c see weight c, which belongs to one output channel. So one weight
// fetched from WMEM is reused by all rows, and each PE ends an interval with
// the membrane partial sum of one (position, channel) neuron. The signals are
// broadcast here; the figure draws them passed from PE to PE.
// Timing: as pe; 'clr' clears every PSUM.
module pe_array
  import snn_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned NCOLS = COLS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic [NROWS-1:0]            spike,
  input  logic signed [W_BITS-1:0]    weight [NCOLS],
  output logic signed [PSUM_BITS-1:0] psum   [NROWS][NCOLS]
);
  for (genvar r = 0; r < NROWS; r++) begin : g_row
    for (genvar c = 0; c < NCOLS; c++) begin : g_col
      pe u_pe (
        .clk, .rst_n, .clr,
        .spike  (spike[r]),
        .weight (weight[c]),
        .psum   (psum[r][c])
      );
    end
  end
endmodule
