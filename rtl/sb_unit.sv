// sb_unit: sparsity boosting of one m-bit input value (combinational).
//
// The value is cut into 2-bit tiles. Working upwards from the lowest tile,
// for every tile that lies below bit m/2 (tile index bp < m/4):
//   - if the next higher tile is non-zero, the tile is replaced by itself
//     shifted right by one bit;
//   - if the tile two places higher is non-zero, the tile is replaced by zero.
// Each tile's decision uses the original (unboosted) higher tiles, so all
// tiles are evaluated in parallel. Fewer one-bits in the low positions means
// fewer spikes after superposition. The tile rule follows the prose of the
// paper; its pseudo code prints the opposite test (== 0) and is not followed.
// The data width in use, m, comes from the configuration (m_cfg); bits at or
// above m_cfg are expected to be zero. 'changed' tells that boosting altered
// the value. No clock: the result is valid in the same cycle.
module sb_unit #(
  parameter int unsigned M = snn_pkg::DATA_BITS
) (
  input  logic         en,       // boosting enabled
  input  logic [3:0]   m_cfg,    // data width in use (= log2 of time window)
  input  logic [M-1:0] din,
  output logic [M-1:0] dout,
  output logic         changed
);
  localparam int unsigned NT = (M + 1) / 2;  // number of tiles
  logic [2*NT+5:0] ext;
  logic [1:0]      t0 [NT];
  logic [1:0]      t1 [NT];
  logic [1:0]      t2 [NT];
  logic [2*NT-1:0] res;

  assign ext = {{(2*NT+6-M){1'b0}}, din};

  always_comb begin
    res = ext[2*NT-1:0];
    for (int unsigned bp = 0; bp < NT; bp++) begin
      t0[bp] = ext[2*bp +: 2];
      t1[bp] = ext[2*bp+2 +: 2];
      t2[bp] = ext[2*bp+4 +: 2];
      if (en && (bp < 32'(m_cfg) / 4)) begin
        if (t2[bp] != 2'b00)      res[2*bp +: 2] = 2'b00;
        else if (t1[bp] != 2'b00) res[2*bp +: 2] = t0[bp] >> 1;
      end
    end
  end

  assign dout    = res[M-1:0];
  assign changed = (dout != din);
endmodule
