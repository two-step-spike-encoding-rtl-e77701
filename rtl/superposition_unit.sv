// superposition_unit: the spike generator (eigen-train generation plus
// spike-train superposition) for one input value.
//
// One ETG per input bit (8 for 8-bit data, as in the spike-generator figure)
// outputs its eigen-train for the current block of LANES time steps if its
// input bit is 1; a bit-wise OR over all ETG outputs gives LANES steps of the
// complete spike train per cycle. Because the eigen-trains of different bits
// never share a time step, the OR equals their sum, and a value v produces
// exactly v spikes over the 2**m-step time window.
// Timing: 'init' loads all ETG registers at a clock edge (needed after a
// change of m_cfg); 'train' is combinational from 'din' and 'blk'.
module superposition_unit #(
  parameter int unsigned M     = snn_pkg::DATA_BITS,
  parameter int unsigned LANES = snn_pkg::LANES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init,
  input  logic [3:0]       m_cfg,
  input  logic [7:0]       blk,
  input  logic [M-1:0]     din,
  output logic [LANES-1:0] train
);
  logic [LANES-1:0] etrain [M];

  for (genvar n = 0; n < M; n++) begin : g_etg
    etg #(.LANES(LANES), .BIT(n)) u_etg (
      .clk, .rst_n, .init, .m_cfg, .blk,
      .bit_in (din[n]),
      .train  (etrain[n])
    );
  end

  // bit-wise OR (BOR) of all eigen-trains
  always_comb begin
    train = '0;
    for (int unsigned n = 0; n < M; n++) train |= etrain[n];
  end
endmodule
