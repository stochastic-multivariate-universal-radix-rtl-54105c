// smurf_harness: runs one function-approximation workload on its own
// smurf_top instance (M inputs, N states per chain).
//
// When go rises it fits the N^M weights for function FUNC with
// smurf_fit_pkg::fit, loads them through the weight port, and then evaluates
// NPTS random input points at bitstream lengths 64 and 256. For each run it
// checks the handshake timing (done L+2 edges after start) and accumulates
// |ones/L - T(x)| (the workload error) and |ones/L - E[y]| (distance to the
// steady-state mean of the loaded weights). It then bounds:
//   fit error (analytic, over the grid)              < FIT_MAX
//   mean error against the target at L = 64         < ERR64_MAX
//   mean error against the target at L = 256        < ERR256_MAX
// and raises fin. checks and failures are valid once fin is high.
module smurf_harness #(
  parameter int unsigned M          = 2,
  parameter int unsigned N          = 4,
  parameter int          FUNC       = 2,
  parameter int          NPTS       = 100,
  parameter int          FIT_GRID   = 24,
  parameter real         FIT_MAX    = 0.03,
  parameter real         ERR64_MAX  = 0.10,
  parameter real         ERR256_MAX = 0.06
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures
);
  import smurf_fit_pkg::*;
  localparam int unsigned NW = smurf_pkg::ipow(N, M);
  localparam int unsigned AW = smurf_pkg::idx_w(NW);
  localparam int unsigned W  = 8;

  logic          cfg_we = 0;
  logic [AW-1:0] cfg_addr = '0;
  logic [W-1:0]  cfg_wdata = '0;
  logic [W-1:0]  px [M];
  logic          start = 0;
  logic [15:0]   stream_len = '0;
  logic          busy, done, yb;
  logic [15:0]   ones;
  logic [AW-1:0] sel;

  smurf_top #(.M(M), .N(N)) u_dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL [%s M=%0d N=%0d] %s", func_name(func_e'(FUNC)), M, N, what);
    end
  endtask

  initial begin
    real w [], wq [];
    real fit_err, err_t [2], err_s [2];
    real x [3];
    fin = 0; checks = 0; failures = 0;
    foreach (px[j]) px[j] = '0;
    wait (go);
    fit(M, N, func_e'(FUNC), FIT_GRID, (N > 4) ? 4000 : 2000, w, fit_err);
    wq = new[NW];
    for (int t = 0; t < NW; t++) begin
      int q;
      q = int'(w[t] * 256.0 + 0.5);
      if (q > 255) q = 255;
      wq[t] = q / 256.0;
      @(negedge clk);
      cfg_we = 1; cfg_addr = AW'(t); cfg_wdata = W'(q);
    end
    @(negedge clk);
    cfg_we = 0;
    check(fit_err < FIT_MAX, $sformatf("fit error %f", fit_err));
    foreach (err_t[k]) begin err_t[k] = 0; err_s[k] = 0; end
    for (int li = 0; li < 2; li++) begin
      int L;
      L = (li == 0) ? 64 : 256;
      for (int k = 0; k < NPTS; k++) begin
        int edges;
        real mean, e;
        x[2] = 0; x[1] = 0;
        for (int j = 0; j < M; j++) begin
          int q;
          q = 1 + ($urandom % 255);
          px[j] = W'(q);
          x[j] = q / 256.0;
        end
        stream_len = 16'(L);
        @(negedge clk);
        start = 1;
        @(negedge clk);
        start = 0;
        edges = 1;
        while (!done && edges < L + 10) begin @(negedge clk); edges++; end
        check(edges == L + 2, $sformatf("latency %0d edges for L=%0d", edges, L));
        mean = real'(ones) / L;
        e = mean - target(func_e'(FUNC), x);
        err_t[li] += ((e < 0) ? -e : e) / NPTS;
        e = mean - steady_mean(M, N, wq, x);
        err_s[li] += ((e < 0) ? -e : e) / NPTS;
      end
    end
    $display("workload %-40s M=%0d N=%0d: fit %.4f | L=64 err %.4f (vs steady %.4f) | L=256 err %.4f (vs steady %.4f)",
             func_name(func_e'(FUNC)), M, N, fit_err, err_t[0], err_s[0], err_t[1], err_s[1]);
    check(err_t[0] < ERR64_MAX,  $sformatf("L=64 error %f", err_t[0]));
    check(err_t[1] < ERR256_MAX, $sformatf("L=256 error %f", err_t[1]));
    check(err_t[1] < err_t[0],   "longer bitstream is more accurate");
    fin = 1;
  end
endmodule
