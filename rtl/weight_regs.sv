// weight_regs: the programmable coefficients of the CPT gate.
//
// SMURF computes a different function only by changing the thresholds
// P_w0 .. P_w{NW-1} of its theta_w gates. This bank holds them in flip-flops,
// one W-bit fraction per gate (threshold = round(P_wt * 2^W)). That the
// weights are programmable is the source's; the single write port and the
// reset value 0 are this design's choice.
//
// Interface: when cfg_we is high at a rising edge, w[cfg_addr] takes
// cfg_wdata; the new value is visible from the next cycle. Addresses at or
// above NW are ignored.
module weight_regs #(
  parameter int unsigned NW = smurf_pkg::ipow(smurf_pkg::SMURF_N, smurf_pkg::SMURF_M),
  parameter int unsigned W  = smurf_pkg::SMURF_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            cfg_we,
  input  logic [smurf_pkg::idx_w(NW)-1:0] cfg_addr,
  input  logic [W-1:0]                    cfg_wdata,
  output logic [W-1:0]                    w [NW]
);

  logic [W-1:0] w_q [NW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned t = 0; t < NW; t++) w_q[t] <= '0;
    end else if (cfg_we) begin
      for (int unsigned t = 0; t < NW; t++)
        if (32'(cfg_addr) == t) w_q[t] <= cfg_wdata;
    end
  end

  assign w = w_q;

endmodule
