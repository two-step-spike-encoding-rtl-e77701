// thres_unit: delayed thresholding and output spike counting.
//
// With delayed thresholding a neuron's membrane is compared with the
// threshold only once per interval of D time steps, against theta_DT. A
// membrane that crossed the threshold several times would have fired several
// spikes, so the unit produces them all at once by dividing the partial sum
// by theta_DT (the divider of the thresholding-unit drawing); the quotient is
// added to the neuron's spike counter (the adder and Count register of the
// same drawing). Negative partial sums give no spike, and the remainder is
// dropped (the next interval starts from PSUM = 0): both are this design's
// choices. theta_DT = 0 gives no spikes.
// One PE row (NCOLS partial sums) is processed per 'step', with NCOLS
// dividers. 'clr' zeroes all counters at the start of an output group.
// 'count' presents the counters saturated to DATA_BITS, the form stored in
// OMEM and re-encoded by the next layer.
// Timing: counters update at the clock edge after 'step'.
module thres_unit
  import snn_pkg::*;
#(
  parameter int unsigned NROWS = ROWS,
  parameter int unsigned NCOLS = COLS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic                        step,
  input  logic [$clog2(NROWS)-1:0]    row,
  input  logic [TH_BITS-1:0]          thres,
  input  logic signed [PSUM_BITS-1:0] psum  [NROWS][NCOLS],
  output logic [DATA_BITS-1:0]        count [NROWS][NCOLS],
  output logic [NCOLS-1:0]            multi   // more than one spike fired in this step
);
  logic [CNT_BITS-1:0]  cnt_q [NROWS][NCOLS];
  logic [PSUM_BITS-1:0] quo   [NCOLS];
  logic [CNT_BITS:0]    sum   [NCOLS];

  always_comb begin
    for (int c = 0; c < NCOLS; c++) begin
      if (psum[row][c] > 0 && thres != '0)
        quo[c] = PSUM_BITS'($unsigned(psum[row][c])) / PSUM_BITS'(thres);
      else
        quo[c] = '0;
      multi[c] = quo[c] > 1;
      if (quo[c] > PSUM_BITS'({CNT_BITS{1'b1}}))
        sum[c] = {1'b0, {CNT_BITS{1'b1}}} + (CNT_BITS+1)'(cnt_q[row][c]);
      else
        sum[c] = (CNT_BITS+1)'(quo[c]) + (CNT_BITS+1)'(cnt_q[row][c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NROWS; r++)
        for (int c = 0; c < NCOLS; c++) cnt_q[r][c] <= '0;
    end else if (clr) begin
      for (int r = 0; r < NROWS; r++)
        for (int c = 0; c < NCOLS; c++) cnt_q[r][c] <= '0;
    end else if (step) begin
      for (int c = 0; c < NCOLS; c++)
        cnt_q[row][c] <= sum[c][CNT_BITS] ? {CNT_BITS{1'b1}} : sum[c][CNT_BITS-1:0];
    end
  end

  always_comb begin
    for (int r = 0; r < NROWS; r++)
      for (int c = 0; c < NCOLS; c++)
        count[r][c] = (cnt_q[r][c] > CNT_BITS'({DATA_BITS{1'b1}})) ?
                      {DATA_BITS{1'b1}} : cnt_q[r][c][DATA_BITS-1:0];
  end
endmodule
