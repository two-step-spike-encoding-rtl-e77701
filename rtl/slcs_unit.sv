// slcs_unit: spike-level clock skipping for the PE rows.
//
// On 'load' it takes, for every PE row, the multi-level spikes of one
// TS-MLE group (up to MAX_SLOTS slots of level 0..3). It then plays the slots
// in order. A slot lasts as many cycles as the largest level any row has in
// it (not the maximum level 3): in cycle c of a slot, row r receives a spike
// (spike[r] = 1) when its level exceeds c, so each PE adds its weight 'level'
// times. A slot whose levels are all zero takes no cycle. This follows the
// paper's spike-level clock skip; the slot ordering is this design's choice.
// Timing: 'load' in cycle 0; spikes in cycles 1..N where N is the sum of the
// per-slot maxima; 'busy' is high exactly in those cycles; 'done' pulses in
// the last of them (or in cycle 1 if N is 0, with busy low).
module slcs_unit
  import snn_pkg::*;
#(
  parameter int unsigned NROWS = ROWS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  level_t           level_in [NROWS][MAX_SLOTS],
  output logic [NROWS-1:0] spike,
  output logic             busy,
  output logic             done
);
  level_t     lvl_q [NROWS][MAX_SLOTS];
  level_t     smax  [MAX_SLOTS];
  logic [2:0] slot_q;   // current slot, MAX_SLOTS = idle
  level_t     cyc_q;    // cycle within the slot
  logic       pend_q;   // load seen, first slot not yet selected

  // per-slot maximum level
  always_comb begin
    for (int s = 0; s < MAX_SLOTS; s++) begin
      smax[s] = '0;
      for (int r = 0; r < NROWS; r++)
        if (lvl_q[r][s] > smax[s]) smax[s] = lvl_q[r][s];
    end
  end

  // next slot with a non-zero maximum at or after index 'from'
  function automatic logic [2:0] next_slot(input int from, input level_t m [MAX_SLOTS]);
    next_slot = 3'(MAX_SLOTS);
    for (int s = MAX_SLOTS - 1; s >= 0; s--)
      if (s >= from && m[s] != '0) next_slot = 3'(s);
  endfunction

  logic [2:0] first_slot;
  assign first_slot = next_slot(0, smax);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_q <= 3'(MAX_SLOTS);
      cyc_q  <= '0;
      pend_q <= 1'b0;
      for (int r = 0; r < NROWS; r++)
        for (int s = 0; s < MAX_SLOTS; s++) lvl_q[r][s] <= '0;
    end else if (load) begin
      lvl_q  <= level_in;
      slot_q <= 3'(MAX_SLOTS);
      cyc_q  <= '0;
      pend_q <= 1'b1;
    end else if (pend_q) begin
      pend_q <= 1'b0;
      slot_q <= first_slot;
      cyc_q  <= '0;
      if (first_slot != 3'(MAX_SLOTS) && smax[first_slot[1:0]] == 2'd1) begin
        slot_q <= next_slot(32'(first_slot) + 1, smax);
      end else if (first_slot != 3'(MAX_SLOTS)) begin
        cyc_q <= 2'd1;
      end
    end else if (slot_q != 3'(MAX_SLOTS)) begin
      if (cyc_q + 2'd1 >= smax[slot_q[1:0]]) begin
        slot_q <= next_slot(32'(slot_q) + 1, smax);
        cyc_q  <= '0;
      end else begin
        cyc_q <= cyc_q + 2'd1;
      end
    end
  end

  // Cycle 1 after load plays cycle 0 of the first non-empty slot directly.
  logic [2:0] cur_slot;
  level_t     cur_cyc;
  assign cur_slot = pend_q ? first_slot : slot_q;
  assign cur_cyc  = pend_q ? '0 : cyc_q;
  assign busy     = (cur_slot != 3'(MAX_SLOTS));

  always_comb begin
    for (int r = 0; r < NROWS; r++)
      spike[r] = busy && (lvl_q[r][cur_slot[1:0]] > cur_cyc);
  end

  // done: last busy cycle, or the cycle after a load with nothing to play
  always_comb begin
    if (pend_q && !busy) done = 1'b1;
    else if (busy) begin
      done = (cur_cyc + 2'd1 >= smax[cur_slot[1:0]]) &&
             (next_slot(32'(cur_slot) + 1, smax) == 3'(MAX_SLOTS));
    end else done = 1'b0;
  end
endmodule
