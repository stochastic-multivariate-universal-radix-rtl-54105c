// rng_delay_line: gives every theta-gate its own delayed copy of the single
// random sequence.
//
// SMURF feeds each theta-gate a differently delayed version of one RNG word
// sequence rnd(n), so that the gates see what look like distinct random
// sequences. Which delays are used matters. If two input theta_x gates saw the
// same word a few cycles apart, the chain FSMs they drive would replay each
// other's moves (with a one-cycle offset and equal inputs, chain 2 copies
// chain 1). If a theta_w gate used a word that an input gate had just used, its
// output bit would depend on the present state. This block therefore produces
//   taps[j](n)     = rnd(n + j*SPACING),                      j = 0 .. M-1
//   taps[M+t](n)   = rnd(n + M*SPACING + NW - 1 - t),         t = 0 .. NW-1
// The M input copies are SPACING cycles apart, several times the mixing time
// of a short chain. The NW weight copies are all words that no input gate
// has used yet, so the selected one is independent of the state.
//
// Shifts ahead of the generator are free for an LFSR: every future bit is a
// fixed XOR of the current state bits (shift-and-add property). The input
// taps and the first weight tap are XOR networks over the LFSR state, with
// masks computed at elaboration from the recurrence
// u(t) = u(t-32) ^ u(t-22) ^ u(t-2) ^ u(t-1). The other weight taps are that
// word delayed by t cycles in a register chain. Branching one RNG into
// delayed copies follows the source; the offsets and their realisation are
// this design's choices.
//
// Interface: input taps are combinational from the LFSR state. Weight tap t
// is valid from t cycles after reset (the chain resets to 0).
module rng_delay_line #(
  parameter int unsigned W       = smurf_pkg::SMURF_W,
  parameter int unsigned LFSR_W  = smurf_pkg::SMURF_LFSR_W,
  parameter int unsigned M       = smurf_pkg::SMURF_M,
  parameter int unsigned NW      = smurf_pkg::ipow(smurf_pkg::SMURF_N, smurf_pkg::SMURF_M),
  parameter int unsigned SPACING = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LFSR_W-1:0] state,
  output logic [W-1:0]      taps [M + NW]
);

  // Shifted words computed from the state: M input taps and the weight base.
  localparam int unsigned NS = M + 1;

  typedef logic [LFSR_W-1:0]       mask_t;
  typedef logic [NS*W*LFSR_W-1:0]  mask_tab_t;   // shifted word k, bit i at (k*W + i)

  // Shift (in cycles) of shifted word k.
  function automatic int unsigned shift_of(input int unsigned k);
    return (k < M) ? k * SPACING : M * SPACING + NW - 1;
  endfunction

  // Bit i of word k is u(n + shift_of(k)*W - i); u(n - j) is state bit j.
  function automatic mask_tab_t build_masks();
    mask_tab_t   tab;
    mask_t       hist [LFSR_W];   // hist[j] = mask of u(t - j), t the newest step
    mask_t       nb;
    int unsigned t_now;
    tab = '0;
    t_now = 0;
    for (int unsigned j = 0; j < LFSR_W; j++) hist[j] = mask_t'(1) << j;
    for (int unsigned k = 0; k < NS; k++) begin
      while (t_now < shift_of(k) * W) begin
        nb = hist[31] ^ hist[21] ^ hist[1] ^ hist[0];
        for (int j = LFSR_W - 1; j > 0; j--) hist[j] = hist[j-1];
        hist[0] = nb;
        t_now++;
      end
      for (int unsigned i = 0; i < W; i++) tab[(k*W + i)*LFSR_W +: LFSR_W] = hist[i];
    end
    return tab;
  endfunction

  localparam mask_tab_t MASKS = build_masks();

  logic [W-1:0] shifted [NS];

  for (genvar k = 0; k < NS; k++) begin : g_shift
    for (genvar i = 0; i < W; i++) begin : g_bit
      assign shifted[k][i] = ^(state & MASKS[(k*W + i)*LFSR_W +: LFSR_W]);
    end
  end

  for (genvar j = 0; j < M; j++) begin : g_xtap
    assign taps[j] = shifted[j];
  end

  assign taps[M] = shifted[M];

  if (NW > 1) begin : g_wchain
    logic [W-1:0] dly_q [NW-1];   // dly_q[d] = weight base word from d+1 cycles ago

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned d = 0; d < NW - 1; d++) dly_q[d] <= '0;
      end else begin
        dly_q[0] <= shifted[M];
        for (int unsigned d = 1; d < NW - 1; d++) dly_q[d] <= dly_q[d-1];
      end
    end

    for (genvar t = 1; t < NW; t++) begin : g_wtap
      assign taps[M + t] = dly_q[t-1];
    end
  end

  initial assert (LFSR_W == 32) else $error("rng_delay_line: recurrence is for a 32-bit LFSR");

endmodule
