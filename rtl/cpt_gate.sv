// cpt_gate: conditional-probability-table gate.
//
// NW theta-gates, gate t comparing weight w[t] with its own random word
// rnd[t], and a multiplexer that passes the bit of gate sel to the output. With
// sel driven by the SMURF codeword, the output bitstream y_b has mean
// sum_s P(s) * w[s] / 2^W, where P(s) is the steady-state probability of
// aggregate state s. Structure as in the source; the output is not registered
// (this design's choice).
//
// Interface: purely combinational.
module cpt_gate #(
  parameter int unsigned NW = smurf_pkg::ipow(smurf_pkg::SMURF_N, smurf_pkg::SMURF_M),
  parameter int unsigned W  = smurf_pkg::SMURF_W
) (
  input  logic [W-1:0]                    w   [NW],
  input  logic [W-1:0]                    rnd [NW],
  input  logic [smurf_pkg::idx_w(NW)-1:0] sel,
  output logic                            yb
);

  logic [NW-1:0] theta_bits;

  for (genvar t = 0; t < NW; t++) begin : g_theta
    theta_gate #(.W(W)) u_theta (
      .thr   (w[t]),
      .rnd   (rnd[t]),
      .bit_o (theta_bits[t])
    );
  end

  always_comb begin
    yb = 1'b0;
    for (int unsigned t = 0; t < NW; t++)
      if (32'(sel) == t) yb = theta_bits[t];
  end

endmodule
