// smurf_pkg: constants and helpers shared by the SMURF approximator.
//
// The defaults describe the configuration that is built in hardware: two input
// variables (M = 2), each driving a 4-state chain FSM (N = 4), so the CPT gate
// holds N^M = 16 weights. Chains may also have different lengths (radix_vec_t);
// the codeword is then a mixed-radix number. Random words and thresholds are W = 8-bit unsigned
// fractions (value = word / 2^W); that width is this design's choice, the
// source only says "standard fixed-point". The bitstream length is a run-time
// input of smurf_top (64 is the length the evaluation settles on).
package smurf_pkg;

  localparam int unsigned SMURF_M          = 2;
  localparam int unsigned SMURF_N          = 4;
  localparam int unsigned SMURF_W          = 8;

  // Random number generator: a 32-bit Fibonacci LFSR, state bit i = u(n-i),
  // u(t) = u(t-32) ^ u(t-22) ^ u(t-2) ^ u(t-1).
  localparam int unsigned SMURF_LFSR_W = 32;

  function automatic logic lfsr_fb(input logic [SMURF_LFSR_W-1:0] s);
    return s[31] ^ s[21] ^ s[1] ^ s[0];
  endfunction

  // Integer power, usable in parameter expressions (b^e).
  function automatic int unsigned ipow(input int unsigned b, input int unsigned e);
    int unsigned r;
    r = 1;
    for (int unsigned k = 0; k < e; k++) r = r * b;
    return r;
  endfunction

  // Chain lengths, one per input variable (entries at and above M are unused).
  localparam int unsigned SMURF_MAX_M = 8;
  typedef int unsigned radix_vec_t [SMURF_MAX_M];

  // Number of aggregate states: product of the first m chain lengths.
  function automatic int unsigned radix_prod(input radix_vec_t r, input int unsigned m);
    int unsigned p;
    p = 1;
    for (int unsigned j = 0; j < m; j++) p = p * r[j];
    return p;
  endfunction

  // Longest of the first m chains.
  function automatic int unsigned radix_max(input radix_vec_t r, input int unsigned m);
    int unsigned x;
    x = 0;
    for (int unsigned j = 0; j < m; j++) if (r[j] > x) x = r[j];
    return x;
  endfunction

  // Width of an index over n values, at least 1 bit.
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
