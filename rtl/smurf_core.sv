// smurf_core: the multivariate FSM block of SMURF.
//
// One chain FSM per input variable. FSM j (0-based here, x_{j+1} in the
// usual numbering) has RADIX[j] states and is driven by input bit xb[j]. The
// M state indices together form the universal-radix codeword
// s = [i_M, ..., i_1], a mixed-radix number with i_1 as the least significant
// digit:
//   sel = i_1 + R_1 * (i_2 + R_2 * (i_3 + ...)),   R_j = RADIX[j-1],
// an index 0 .. prod(RADIX)-1 that selects one of the theta_w gates of the
// CPT gate. With every chain of length N (the default, RADIX = N everywhere)
// this is sum_j i_j N^(j-1). The chain FSMs, the codeword and the freedom to
// give each chain its own length follow the source; the digit order is
// inferred from the source's weight tables.
//
// Interface: digits and sel come from registered state (Moore outputs); all
// FSMs move on the same clock edge; init returns every FSM to S_0. digits[j]
// is zero-extended to the width of the longest chain.
module smurf_core #(
  parameter int unsigned          M     = smurf_pkg::SMURF_M,
  parameter int unsigned          N     = smurf_pkg::SMURF_N,
  parameter smurf_pkg::radix_vec_t RADIX = '{default: N}
) (
  input  logic                                                                   clk,
  input  logic                                                                   rst_n,
  input  logic                                                                   init,
  input  logic [M-1:0]                                                           xb,
  output logic [smurf_pkg::idx_w(smurf_pkg::radix_max(RADIX, M))-1:0]            digits [M],
  output logic [smurf_pkg::idx_w(smurf_pkg::radix_prod(RADIX, M))-1:0]           sel
);

  localparam int unsigned NW  = smurf_pkg::radix_prod(RADIX, M);
  localparam int unsigned SLW = smurf_pkg::idx_w(NW);
  localparam int unsigned DW  = smurf_pkg::idx_w(smurf_pkg::radix_max(RADIX, M));

  for (genvar j = 0; j < M; j++) begin : g_fsm
    localparam int unsigned RJ  = RADIX[j];
    localparam int unsigned RJW = smurf_pkg::idx_w(RJ);
    logic [RJW-1:0] st;

    chain_fsm #(.N(RJ)) u_fsm (
      .clk   (clk),
      .rst_n (rst_n),
      .init  (init),
      .xb    (xb[j]),
      .state (st)
    );

    assign digits[j] = DW'(st);
  end

  // Horner evaluation of the mixed-radix codeword, most significant digit first.
  always_comb begin
    sel = '0;
    for (int j = M - 1; j >= 0; j--) sel = SLW'(sel * RADIX[j]) + SLW'(digits[j]);
  end

  initial assert (M >= 1 && M <= smurf_pkg::SMURF_MAX_M)
    else $error("smurf_core: M must be 1 .. %0d", smurf_pkg::SMURF_MAX_M);

endmodule
