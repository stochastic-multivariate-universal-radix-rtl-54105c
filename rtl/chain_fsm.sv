// chain_fsm: N-state saturating chain finite-state machine.
//
// States S_0 .. S_{N-1} form a chain. Each clock the FSM moves one state to
// the right when the input bit xb is 1 and one state to the left when it is 0;
// at S_{N-1} a 1 and at S_0 a 0 leave the state unchanged. Driven by a
// bitstream with P(xb=1) = p, the state occupancy settles to
// P(S_i) proportional to (p/(1-p))^i, the quantity the SMURF weights are fitted
// against. The transition rule is the source's; the binary state encoding and
// the initial state S_0 after reset or init follow its "initial state" wording.
//
// Interface: state is registered. init (synchronous) has priority over xb.
module chain_fsm #(
  parameter int unsigned N = smurf_pkg::SMURF_N
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              init,
  input  logic                              xb,
  output logic [smurf_pkg::idx_w(N)-1:0]    state
);

  localparam int unsigned SW = smurf_pkg::idx_w(N);
  localparam logic [SW-1:0] LAST = SW'(N - 1);

  logic [SW-1:0] state_q, state_d;

  always_comb begin
    state_d = state_q;
    if (xb) begin
      if (state_q != LAST) state_d = state_q + 1'b1;
    end else begin
      if (state_q != '0)   state_d = state_q - 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state_q <= '0;
    else if (init) state_q <= '0;
    else           state_q <= state_d;
  end

  assign state = state_q;

  initial assert (N >= 2) else $error("chain_fsm: N must be at least 2");

  // The state never leaves the chain.
  a_in_range: assert property (@(posedge clk) disable iff (!rst_n) state_q <= LAST);

endmodule
