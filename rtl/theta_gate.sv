// theta_gate: converts a fixed-point probability into a stochastic bit.
//
// It is the comparator of a stochastic number generator: the output is 1 when
// the random word is strictly below the threshold, else 0, so over many cycles
// the fraction of ones approaches thr / 2^W. The strict comparison follows the
// source; representing the probability as a W-bit fraction (so 1.0 itself is
// not reachable, the maximum is 1 - 2^-W) is this design's choice.
//
// Interface: purely combinational.
module theta_gate #(
  parameter int unsigned W = smurf_pkg::SMURF_W
) (
  input  logic [W-1:0] thr,
  input  logic [W-1:0] rnd,
  output logic         bit_o
);

  assign bit_o = (rnd < thr);

endmodule
