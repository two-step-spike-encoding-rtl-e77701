// etg: eigen-train generator for one bit position n (= BIT) of the input.
//
// The eigen-train of bit n over a time window of 2**m steps carries 2**n
// spikes with period P = 2**m / 2**n (as the paper defines it). Its spikes sit
// at the steps t with t mod P == P/2 - 1, so that the trains of different bits
// never coincide: bit m-1 fires on even steps, bit m-2 on steps 1, 5, 9, ...,
// bit 0 once, at step 2**(m-1) - 1. (The starting positions are this design's
// reading of the eigen-train figure, which shows the trains staggered but
// prints no step numbers.)
//
// As in the spike-generator figure, the ETG holds LANES (8) one-bit registers
// with the eigen-train for LANES consecutive steps, and each cycle it outputs
// those steps gated by the input bit. The registers are (re)loaded on 'init'
// for the configured m ("initial stage" of the paper's pseudo code). When the
// period exceeds LANES, only one block of LANES steps in every P/LANES blocks
// holds a spike; two small registers (block mask and block select) pick it
// out using the block index 'blk' (time step = blk*LANES + lane). The gating
// of the registers by the input bit is a masking (AND) function; the figure
// labels that gate "OR" without giving its inputs' polarity.
// Timing: 'init' loads the registers at the clock edge; 'train' is
// combinational from 'bit_in' and 'blk'.
module etg #(
  parameter int unsigned LANES = snn_pkg::LANES,
  parameter int unsigned BIT   = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init,    // load eigen-train registers for m_cfg
  input  logic [3:0]       m_cfg,   // m: time window is 2**m
  input  logic [7:0]       blk,     // index of the LANES-step block being generated
  input  logic             bit_in,  // input data bit n
  output logic [LANES-1:0] train    // spikes of steps blk*LANES .. blk*LANES+LANES-1
);
  logic [LANES-1:0] pat_q,  pat_d;
  logic [7:0]       mask_q, mask_d;
  logic [7:0]       sel_q,  sel_d;

  always_comb begin
    int unsigned plog, p, first;
    pat_d  = '0;
    mask_d = '0;
    sel_d  = '0;
    plog   = 32'(m_cfg) - BIT;
    p      = 0;
    first  = 0;
    if (32'(m_cfg) > BIT && m_cfg <= 4'd8) begin
      p     = 32'd1 << plog;
      first = p / 2 - 1;
      for (int unsigned l = 0; l < LANES; l++)
        pat_d[l] = ((l % p) == (first % LANES)) || (p > LANES && l == first % LANES);
      if (p > LANES) begin
        mask_d = 8'(p / LANES - 1);
        sel_d  = 8'(first / LANES);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pat_q  <= '0;
      mask_q <= '0;
      sel_q  <= '0;
    end else if (init) begin
      pat_q  <= pat_d;
      mask_q <= mask_d;
      sel_q  <= sel_d;
    end
  end

  assign train = (bit_in && ((blk & mask_q) == sel_q)) ? pat_q : '0;
endmodule
