// pe: processing element of the SNN core.
//
// As in the PE drawing of the core figure, the PE is a weight register input,
// an adder and a partial-sum (PSUM) register fed back into the adder. In
// every cycle in which its row delivers a spike (one cycle per spike level,
// see slcs_unit) it adds its column's signed weight to PSUM. 'clr' zeroes
// PSUM at the start of each delayed-thresholding interval and has priority.
// Timing: PSUM updates at the clock edge after 'spike'.
module pe
  import snn_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic                        spike,
  input  logic signed [W_BITS-1:0]    weight,
  output logic signed [PSUM_BITS-1:0] psum
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     psum <= '0;
    else if (clr)   psum <= '0;
    else if (spike) psum <= psum + PSUM_BITS'(weight);
  end
endmodule
