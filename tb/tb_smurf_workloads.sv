// tb_smurf_workloads: the function-approximation workloads evaluated for
// SMURF, each on its own smurf_top instance, all running in parallel:
//   default configuration (M = 2, N = 4): tanh(x) and swish(x) on [0,1]
//   (univariate: the second input is random and the fit ignores it), the
//   bivariate softmax e^x1/(e^x1+e^x2), and the Euclidean distance, whose
//   fitted weights are also compared with the published 16-entry table;
//   three inputs (M = 3) with 3-, 4- and 8-state chains: the first output of
//   the 3-input softmax.
// A mixed-radix instance (chains of 3 and 5 states, 15 weights) loaded with
// random weights checks that 4096-bit runs reach the analytic steady state
// prod_j P(S_{i_j}) weighted sum, with s = i_1 + 3 * i_2.
// Weights are fitted in simulation (smurf_fit_pkg). Bounds are set from the
// statistics of a 64- or 256-bit average, see smurf_harness.
module tb_smurf_workloads;
  logic clk = 0, rst_n = 1, go = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  localparam int NH = 7;
  logic fin [NH];
  int   hc  [NH];
  int   hf  [NH];

  smurf_harness #(.M(2), .N(4), .FUNC(2))  h_tanh   (.clk, .rst_n, .go, .fin(fin[0]), .checks(hc[0]), .failures(hf[0]));
  smurf_harness #(.M(2), .N(4), .FUNC(3))  h_swish  (.clk, .rst_n, .go, .fin(fin[1]), .checks(hc[1]), .failures(hf[1]));
  smurf_harness #(.M(2), .N(4), .FUNC(4))  h_smax2  (.clk, .rst_n, .go, .fin(fin[2]), .checks(hc[2]), .failures(hf[2]));
  smurf_harness #(.M(2), .N(4), .FUNC(0))  h_euclid (.clk, .rst_n, .go, .fin(fin[3]), .checks(hc[3]), .failures(hf[3]));
  smurf_harness #(.M(3), .N(3), .FUNC(5), .FIT_GRID(16)) h_smax3_n3 (.clk, .rst_n, .go, .fin(fin[4]), .checks(hc[4]), .failures(hf[4]));
  smurf_harness #(.M(3), .N(4), .FUNC(5), .FIT_GRID(16)) h_smax3_n4 (.clk, .rst_n, .go, .fin(fin[5]), .checks(hc[5]), .failures(hf[5]));
  smurf_harness #(.M(3), .N(8), .FUNC(5), .FIT_GRID(16)) h_smax3_n8 (.clk, .rst_n, .go, .fin(fin[6]), .checks(hc[6]), .failures(hf[6]));

  // Mixed-radix end-to-end check.
  localparam smurf_pkg::radix_vec_t RX = '{3, 5, 1, 1, 1, 1, 1, 1};
  logic       mx_we = 0, mx_start = 0, mx_busy, mx_done, mx_yb;
  logic [3:0] mx_addr = '0, mx_sel;
  logic [7:0] mx_wdata = '0;
  logic [7:0] mx_px [2];
  logic [15:0] mx_len = 16'd4096, mx_ones;
  bit         mx_fin = 0;
  int         mx_checks = 0, mx_failures = 0;

  smurf_top #(.M(2), .RADIX(RX)) u_mixed (
    .clk, .rst_n, .cfg_we(mx_we), .cfg_addr(mx_addr), .cfg_wdata(mx_wdata), .px(mx_px),
    .start(mx_start), .stream_len(mx_len), .busy(mx_busy), .done(mx_done), .ones(mx_ones),
    .yb(mx_yb), .sel(mx_sel));

  initial begin : mixed
    real wv [15], p1 [], p2 [], e, mean;
    mx_px[0] = '0; mx_px[1] = '0;
    wait (go);
    for (int t = 0; t < 15; t++) begin
      @(negedge clk);
      mx_we = 1; mx_addr = 4'(t); mx_wdata = 8'($urandom);
      wv[t] = mx_wdata / 256.0;
    end
    @(negedge clk);
    mx_we = 0;
    for (int k = 0; k < 12; k++) begin
      int q1, q2;
      q1 = 20 + ($urandom % 216); q2 = 20 + ($urandom % 216);
      mx_px[0] = 8'(q1); mx_px[1] = 8'(q2);
      @(negedge clk); mx_start = 1;
      @(negedge clk); mx_start = 0;
      wait (mx_done);
      @(negedge clk);
      smurf_fit_pkg::chain_probs(3, q1 / 256.0, p1);
      smurf_fit_pkg::chain_probs(5, q2 / 256.0, p2);
      e = 0;
      for (int i2 = 0; i2 < 5; i2++) for (int i1 = 0; i1 < 3; i1++) e += wv[i1 + 3*i2] * p1[i1] * p2[i2];
      mean = mx_ones / 4096.0;
      mx_checks++;
      if (mean - e > 0.04 || e - mean > 0.04) begin
        mx_failures++;
        $display("FAIL mixed radix p=(%0d,%0d)/256 mean %f expected %f", q1, q2, mean, e);
      end
    end
    $display("mixed radix (3,5): %0d runs checked against the steady state", mx_checks);
    mx_fin = 1;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Published weights for sqrt(x1^2+x2^2) (normalised by sqrt 2).
  real table1 [16] = '{0.0, 0.6083, 0.0474, 0.6911, 0.6083, 0.3749, 0.4527, 0.8372,
                       0.0474, 0.4527, 0.0159, 0.5946, 0.6911, 0.8372, 0.5946, 0.9846};

  initial begin
    real w [], fit_err, dmax;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);   // weight-gate random copies valid
    // The fitting method must reproduce the published Euclidean table.
    smurf_fit_pkg::fit(2, 4, smurf_fit_pkg::F_EUCLID, 32, 3000, w, fit_err);
    dmax = 0;
    foreach (table1[t]) begin
      real d;
      d = w[t] - table1[t];
      if (d < 0) d = -d;
      if (d > dmax) dmax = d;
    end
    $display("fitted Euclidean weights vs published table: max |difference| %.4f, fit error %.4f", dmax, fit_err);
    checks++;
    if (dmax > 0.05) failures++;
    go = 1;
    for (int k = 0; k < NH; k++) wait (fin[k]);
    wait (mx_fin);
    for (int k = 0; k < NH; k++) begin checks += hc[k]; failures += hf[k]; end
    checks += mx_checks; failures += mx_failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
