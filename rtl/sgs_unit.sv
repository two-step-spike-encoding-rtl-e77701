// sgs_unit: spike generation skipping (prediction and skipping map).
//
// Prediction: while the controller streams the input values (spike counts of
// the previous layer) of NROWS receptive fields, one value per row per
// 'acc_en', the unit sums them per row. On 'commit' it compares each sum with
// sgs_th * rf_size, which is the paper's test "average spike count of the
// receptive field below a threshold" without a divider, and writes the
// result into the skipping map at positions map_addr .. map_addr+NROWS-1
// (rows whose 'row_valid' bit is 0 are not written). A 1 in the map is the
// paper's zero flag: the neuron is predicted not to fire.
// Processing: for the NROWS positions at lk_addr the unit returns 'skip' and
// 'req' = valid and not skipped; the controller sends input-memory requests
// and runs spike generation only for rows with 'req' set. With 'en' low no
// neuron is skipped.
// Timing: sums and map update at the clock edge; 'skip'/'req' are
// combinational from lk_addr. The map is cleared by reset.
module sgs_unit
  import snn_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned DEPTH = MAP_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic [7:0]           sgs_th,
  input  logic [15:0]          rf_size,      // cin * k * k
  // prediction
  input  logic                 acc_clr,
  input  logic                 acc_en,
  input  logic [DATA_BITS-1:0] cnt_in [NROWS],
  input  logic                 commit,
  input  logic [AW-1:0]        map_addr,
  input  logic [NROWS-1:0]     row_valid,
  // processing
  input  logic [AW-1:0]        lk_addr,
  input  logic [NROWS-1:0]     lk_valid,
  output logic [NROWS-1:0]     skip,
  output logic [NROWS-1:0]     req
);
  logic [DEPTH-1:0] map_q;
  logic [23:0]      sum_q [NROWS];
  logic [23:0]      limit;

  assign limit = 24'(sgs_th) * 24'(rf_size);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      map_q <= '0;
      for (int r = 0; r < NROWS; r++) sum_q[r] <= '0;
    end else begin
      if (acc_clr) begin
        for (int r = 0; r < NROWS; r++) sum_q[r] <= '0;
      end else if (acc_en) begin
        for (int r = 0; r < NROWS; r++) sum_q[r] <= sum_q[r] + 24'(cnt_in[r]);
      end
      if (commit) begin
        for (int r = 0; r < NROWS; r++)
          if (row_valid[r]) map_q[AW'(map_addr + AW'(r))] <= (sum_q[r] < limit);
      end
    end
  end

  always_comb begin
    for (int r = 0; r < NROWS; r++) begin
      skip[r] = en && lk_valid[r] && map_q[AW'(lk_addr + AW'(r))];
      req[r]  = lk_valid[r] && !skip[r];
    end
  end
endmodule
