// smurf_top: Stochastic Multivariate Universal-Radix FSM function approximator.
//
// Computes an M-variable function f(x_1..x_M), all values normalised to [0,1],
// with stochastic bitstreams:
//   * one RNG (lfsr_rng) feeds rng_delay_line, which gives every theta-gate
//     its own shifted copy of the random sequence (input gates SPACING
//     cycles apart, weight gates on words no input gate has used yet);
//   * M theta_x gates turn the input probabilities px[j] into bitstreams;
//   * the SMURF core (smurf_core) runs one N-state chain FSM per input and
//     forms the universal-radix codeword s;
//   * the CPT gate (cpt_gate) holds N^M theta_w gates whose thresholds come
//     from weight_regs and picks the bit of gate s as the output y_b;
//   * sn_decoder restarts the FSMs, counts the ones of y_b over stream_len
//     bits and reports the count (result = ones / stream_len).
// The architecture is the source's; the tap offsets (see rng_delay_line),
// the weight write port and the start/done handshake
// are this design's choices. Defaults M = 2, N = 4 are the configuration built
// in hardware by the source. RADIX gives each chain its own length (default N
// for all); the CPT gate then holds prod(RADIX) weights.
//
// Timing: px and the weights must be stable while busy. done is high for one
// cycle, stream_len+2 rising edges after the edge that samples start; ones is
// then valid and held until the next start. After reset, wait NW-1 cycles
// before the first start so that every weight gate's random copy is valid.
module smurf_top #(
  parameter int unsigned M      = smurf_pkg::SMURF_M,
  parameter int unsigned N      = smurf_pkg::SMURF_N,
  parameter int unsigned W      = smurf_pkg::SMURF_W,
  parameter int unsigned LEN_W  = 16,
  parameter int unsigned SPACING = 32,
  parameter smurf_pkg::radix_vec_t RADIX = '{default: N}
) (
  input  logic                                               clk,
  input  logic                                               rst_n,
  // coefficient (weight) write port
  input  logic                                               cfg_we,
  input  logic [smurf_pkg::idx_w(smurf_pkg::radix_prod(RADIX, M))-1:0] cfg_addr,
  input  logic [W-1:0]                                       cfg_wdata,
  // input probabilities, px[j] / 2^W is P_x(j+1)
  input  logic [W-1:0]                                       px [M],
  // evaluation control
  input  logic                                               start,
  input  logic [LEN_W-1:0]                                   stream_len,
  output logic                                               busy,
  output logic                                               done,
  output logic [LEN_W-1:0]                                   ones,
  // raw output bitstream and codeword
  output logic                                               yb,
  output logic [smurf_pkg::idx_w(smurf_pkg::radix_prod(RADIX, M))-1:0] sel
);

  localparam int unsigned NW   = smurf_pkg::radix_prod(RADIX, M);
  localparam int unsigned TAPS = M + NW;

  logic [smurf_pkg::SMURF_LFSR_W-1:0] lfsr_state;
  logic [W-1:0]  taps  [TAPS];
  logic [W-1:0]  w_rnd [NW];
  logic [W-1:0]  w     [NW];
  logic [M-1:0]  xb;
  logic          fsm_init;

  lfsr_rng #(.W(W)) u_rng (
    .clk   (clk),
    .rst_n (rst_n),
    .rnd   (),
    .state (lfsr_state)
  );

  rng_delay_line #(.W(W), .M(M), .NW(NW), .SPACING(SPACING)) u_dly (
    .clk   (clk),
    .rst_n (rst_n),
    .state (lfsr_state),
    .taps  (taps)
  );

  for (genvar j = 0; j < M; j++) begin : g_theta_x
    theta_gate #(.W(W)) u_theta_x (
      .thr   (px[j]),
      .rnd   (taps[j]),
      .bit_o (xb[j])
    );
  end

  smurf_core #(.M(M), .N(N), .RADIX(RADIX)) u_core (
    .clk    (clk),
    .rst_n  (rst_n),
    .init   (fsm_init),
    .xb     (xb),
    .digits (),
    .sel    (sel)
  );

  weight_regs #(.NW(NW), .W(W)) u_wregs (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg_we),
    .cfg_addr  (cfg_addr),
    .cfg_wdata (cfg_wdata),
    .w         (w)
  );

  for (genvar t = 0; t < NW; t++) begin : g_wtap
    assign w_rnd[t] = taps[M + t];
  end

  cpt_gate #(.NW(NW), .W(W)) u_cpt (
    .w   (w),
    .rnd (w_rnd),
    .sel (sel),
    .yb  (yb)
  );

  sn_decoder #(.LEN_W(LEN_W)) u_dec (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .stream_len (stream_len),
    .yb         (yb),
    .fsm_init   (fsm_init),
    .busy       (busy),
    .done       (done),
    .ones       (ones)
  );

endmodule
