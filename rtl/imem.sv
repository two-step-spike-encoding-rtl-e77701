// imem: input memory of the SNN core.
//
// Holds the layer input: pixels for the first layer, spike counts of the
// previous layer otherwise, one DATA_BITS value per word at address
// (y * in_w + x) * cin + ci. The host writes it through one write port. The
// core reads it through NRD read ports, one per spike-generator row, so the
// four rows can fetch the values of four neighbouring output positions in one
// cycle. Each read port has its own enable: a row whose neuron is predicted
// silent by spike generation skipping issues no request.
// Timing: synchronous write; synchronous read, data valid one cycle after
// the enable, held until the next enabled read.
// The depth is this design's choice; the paper gives no memory sizes.
module imem #(
  parameter int unsigned DEPTH = snn_pkg::IMEM_DEPTH,
  parameter int unsigned WIDTH = snn_pkg::DATA_BITS,
  parameter int unsigned NRD   = snn_pkg::ROWS,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [NRD-1:0]   re,
  input  logic [AW-1:0]    raddr [NRD],
  output logic [WIDTH-1:0] rdata [NRD]
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    always_ff @(posedge clk) begin
      if (re[p]) rdata[p] <= mem[raddr[p]];
    end
  end
endmodule
