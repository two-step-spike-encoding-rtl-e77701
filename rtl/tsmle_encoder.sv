// tsmle_encoder: time-shrinking multi-level encoding of 8 binary time steps.
//
// Spikes of 8 time steps are counted and sent on as 2-bit multi-level spikes
// (level 0..3). Sparse case (at most 3 spikes): the 8 steps shrink to one
// slot whose level is the spike count. Dense case: the 8 steps shrink to two
// slots of 4 steps each, level = spikes in each half. Both cases are from the
// paper. A half may hold 4 spikes, which a 2-bit level cannot carry; this
// design then splits the 8 steps into four slots of 2 steps (at most 2 spikes
// each). Lane 0 is the earliest time step; slot 0 covers the earliest steps.
// Purely combinational. Slots at or beyond 'nslot' carry level 0.
module tsmle_encoder
  import snn_pkg::*;
(
  input  logic [7:0]   train,
  output level_t       level [MAX_SLOTS],
  output logic [2:0]   nslot   // 1, 2 or 4
);
  logic [3:0] c8;
  logic [2:0] c4 [2];
  logic [1:0] c2 [4];

  always_comb begin
    c8 = '0;
    for (int i = 0; i < 8; i++) c8 += 4'(train[i]);
    for (int h = 0; h < 2; h++) begin
      c4[h] = '0;
      for (int i = 0; i < 4; i++) c4[h] += 3'(train[4*h+i]);
    end
    for (int q = 0; q < 4; q++) c2[q] = 2'(train[2*q]) + 2'(train[2*q+1]);

    for (int s = 0; s < MAX_SLOTS; s++) level[s] = '0;
    if (c8 <= 4'd3) begin
      nslot    = 3'd1;
      level[0] = c8[1:0];
    end else if (c4[0] <= 3'd3 && c4[1] <= 3'd3) begin
      nslot    = 3'd2;
      level[0] = c4[0][1:0];
      level[1] = c4[1][1:0];
    end else begin
      nslot = 3'd4;
      for (int q = 0; q < 4; q++) level[q] = c2[q];
    end
  end
endmodule
