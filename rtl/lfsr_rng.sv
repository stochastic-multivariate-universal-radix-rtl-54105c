// lfsr_rng: the single random number generator of the SMURF.
//
// Every theta-gate in the design compares a threshold against a uniform random
// word, and one generator serves them all (the per-gate copies are derived
// from its state by rng_delay_line). The generator is a 32-bit maximal-length
// Fibonacci LFSR. With u(t) the generated bit sequence, state bit i holds
// u(n-i), and the new bit follows the recurrence
//   u(t) = u(t-32) ^ u(t-22) ^ u(t-2) ^ u(t-1)
// (feedback taps 32, 22, 2, 1; period 2^32 - 1). The LFSR advances W bit-steps
// per clock, so the W-bit word rnd = state[W-1:0] presented each cycle
// consists of W newly generated bits. The LFSR type, polynomial, seed and
// width are this design's choice; the source names only "an RNG".
//
// Interface: rnd is read as the fraction rnd / 2^W; state is the whole LFSR
// register for rng_delay_line. Both change on every rising clock edge; reset
// loads SEED.
module lfsr_rng #(
  parameter int unsigned W      = smurf_pkg::SMURF_W,
  parameter int unsigned LFSR_W = smurf_pkg::SMURF_LFSR_W,
  parameter logic [31:0] SEED   = 32'hACE1_2B7D
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic [W-1:0]      rnd,
  output logic [LFSR_W-1:0] state
);

  logic [LFSR_W-1:0] state_q, state_d;

  always_comb begin
    state_d = state_q;
    for (int unsigned k = 0; k < W; k++)
      state_d = {state_d[LFSR_W-2:0], smurf_pkg::lfsr_fb(state_d)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= LFSR_W'(SEED);
    else        state_q <= state_d;
  end

  assign rnd   = state_q[W-1:0];
  assign state = state_q;

  initial begin
    assert (LFSR_W == 32) else $error("lfsr_rng: feedback taps are for a 32-bit LFSR");
    assert (W <= LFSR_W)  else $error("lfsr_rng: W must not exceed LFSR_W");
    assert (SEED != 0)    else $error("lfsr_rng: an all-zero seed locks the LFSR");
  end

endmodule
