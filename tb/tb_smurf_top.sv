// tb_smurf_top: end-to-end test of the SMURF approximator at its default
// parameters (M = 2 inputs, N = 4 states, 16 weights, W = 8).
//
// Expected values are computed here from the steady-state law of the chain
// FSMs, independently of the RTL:
//   P(i_j) = t_j^i / sum_k t_j^k,  t_j = p_j / (1 - p_j)
//   E[y]   = sum_{i2,i1} P(i2) P(i1) * w[i2*4 + i1] / 256
// Phase A (convergence): the weight table for the 2-D Euclidean distance is
//   loaded, and for a grid of inputs the mean of a 4096-bit run must match
//   E[y] within 0.04.
// Phase B (workloads, bitstream length 64): Euclidean distance
//   sqrt(x1^2+x2^2)/sqrt(2) and the Hartley-transform kernel table; the mean
//   absolute error of 64-bit runs against E[y] is reported and bounded, and for
//   the Euclidean table also against the target function itself.
// Phase C: handshake and timing, done exactly L+2 edges after start; ones
//   equal to the ones of the yb bitstream observed on the port.
// Mechanisms counted and required at least once: FSM saturation at S_0 and at
//   S_3 of both chains, FSM restart (init) on start, reconfiguration of the
//   weight table between runs, completed runs.
module tb_smurf_top;
  import smurf_pkg::*;
  localparam int unsigned M = 2, N = 4, NW = 16, W = 8, LEN_W = 16;

  logic clk = 0, rst_n = 1;
  logic cfg_we = 0;
  logic [3:0] cfg_addr = '0;
  logic [W-1:0] cfg_wdata = '0;
  logic [W-1:0] px [M];
  logic start = 0;
  logic [LEN_W-1:0] stream_len = '0;
  logic busy, done, yb;
  logic [LEN_W-1:0] ones;
  logic [3:0] sel;

  int checks = 0, failures = 0;
  int n_sat_lo = 0, n_sat_hi = 0, n_init = 0, n_reconfig = 0, n_runs = 0;

  smurf_top dut (.*);

  always #5 clk = ~clk;

  // Reset starts high so that its fall is a real edge.
  initial #1 rst_n = 0;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Weight tables (probabilities) of the two bivariate examples.
  real euclid [NW] = '{0.0, 0.6083, 0.0474, 0.6911, 0.6083, 0.3749, 0.4527, 0.8372,
                       0.0474, 0.4527, 0.0159, 0.5946, 0.6911, 0.8372, 0.5946, 0.9846};
  real hartley [NW] = '{0.0, 0.4002, 0.4002, 0.3379, 0.3379, 0.4334, 0.4334, 0.6600,
                        0.0, 0.5407, 0.5407, 0.4564, 0.4564, 0.5854, 0.5854, 0.8916};
  logic [W-1:0] wq [NW];      // quantised weights currently loaded

  // Observe the FSM end-state self loops through the codeword.
  logic [3:0] sel_prev;
  always @(posedge clk) begin
    if (busy) begin
      if (sel_prev[1:0] == 0 && sel[1:0] == 0) n_sat_lo++;
      if (sel_prev[1:0] == 3 && sel[1:0] == 3) n_sat_hi++;
      if (sel_prev[3:2] == 0 && sel[3:2] == 0) n_sat_lo++;
      if (sel_prev[3:2] == 3 && sel[3:2] == 3) n_sat_hi++;
    end
    sel_prev <= sel;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("%t FAIL %s", $time, what);
    end
  endtask

  task automatic load(input real tbl [NW]);
    for (int t = 0; t < NW; t++) begin
      int q;
      q = int'(tbl[t] * 256.0 + 0.5);
      if (q > 255) q = 255;
      wq[t] = W'(q);
      @(negedge clk);
      cfg_we = 1; cfg_addr = 4'(t); cfg_wdata = W'(q);
    end
    @(negedge clk);
    cfg_we = 0;
    n_reconfig++;
  endtask

  function automatic real expected(input real p1, input real p2);
    real t1, t2, n1, n2, e;
    t1 = p1 / (1.0 - p1); t2 = p2 / (1.0 - p2);
    n1 = 0; n2 = 0;
    for (int i = 0; i < N; i++) begin n1 += t1 ** i; n2 += t2 ** i; end
    e = 0;
    for (int i2 = 0; i2 < N; i2++)
      for (int i1 = 0; i1 < N; i1++)
        e += (t2 ** i2) / n2 * (t1 ** i1) / n1 * real'(wq[i2*N + i1]) / 256.0;
    return e;
  endfunction

  // One evaluation; returns ones/L and checks the timing and the count.
  task automatic run(input int L, input int q1, input int q2, output real mean);
    int edges, seen_ones;
    px[0] = W'(q1); px[1] = W'(q2);
    stream_len = LEN_W'(L);
    @(negedge clk);
    start = 1;
    @(posedge clk);
    #1;
    start = 0;
    n_init++;
    check(sel == 0, "FSMs restart in S_0");
    edges = 1; seen_ones = 0;
    // the INIT cycle output is not counted, the next L are
    @(posedge clk); edges++; #1;
    while (!done) begin
      seen_ones += int'(yb);
      @(posedge clk); edges++; #1;
      if (edges > L + 10) break;
    end
    check(edges == L + 2, $sformatf("latency %0d edges, expected %0d", edges, L + 2));
    check(int'(ones) == seen_ones, $sformatf("ones %0d, yb stream had %0d", ones, seen_ones));
    mean = real'(ones) / real'(L);
    n_runs++;
  endtask

  initial begin
    real mean, e, err_sum, terr_sum;
    int q1, q2, cnt;
    px[0] = '0; px[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);

    // Phase A: convergence to the steady-state value, long bitstreams.
    load(euclid);
    for (int a = 0; a < 5; a++)
      for (int b = 0; b < 5; b++) begin
        q1 = 26 + a * 51; q2 = 26 + b * 51;
        run(4096, q1, q2, mean);
        e = expected(q1 / 256.0, q2 / 256.0);
        check((mean - e) < 0.04 && (e - mean) < 0.04,
              $sformatf("euclid p=(%0d,%0d)/256 mean %f expected %f", q1, q2, mean, e));
      end

    // Phase B: workloads at bitstream length 64 over a random input grid.
    err_sum = 0; terr_sum = 0; cnt = 0;
    for (int k = 0; k < 400; k++) begin
      real x1, x2;
      q1 = 1 + ($urandom % 255); q2 = 1 + ($urandom % 255);
      run(64, q1, q2, mean);
      x1 = q1 / 256.0; x2 = q2 / 256.0;
      e = expected(x1, x2);
      err_sum += (mean > e) ? mean - e : e - mean;
      e = $sqrt(x1 * x1 + x2 * x2) / $sqrt(2.0);
      terr_sum += (mean > e) ? mean - e : e - mean;
      cnt++;
    end
    $display("Euclidean, L=64: mean |error| vs steady state %f, vs sqrt(x1^2+x2^2)/sqrt(2) %f",
             err_sum / cnt, terr_sum / cnt);
    check(err_sum / cnt < 0.1, "Euclidean 64-bit error against steady state");
    check(terr_sum / cnt < 0.1, "Euclidean 64-bit error against target");

    load(hartley);
    err_sum = 0; cnt = 0;
    for (int k = 0; k < 400; k++) begin
      q1 = 1 + ($urandom % 255); q2 = 1 + ($urandom % 255);
      run(64, q1, q2, mean);
      e = expected(q1 / 256.0, q2 / 256.0);
      err_sum += (mean > e) ? mean - e : e - mean;
      cnt++;
    end
    $display("Hartley kernel table, L=64: mean |error| vs steady state %f", err_sum / cnt);
    check(err_sum / cnt < 0.1, "Hartley 64-bit error against steady state");
    for (int a = 0; a < 3; a++) begin
      q1 = 40 + a * 80; q2 = 200 - a * 70;
      run(4096, q1, q2, mean);
      e = expected(q1 / 256.0, q2 / 256.0);
      check((mean - e) < 0.04 && (e - mean) < 0.04,
            $sformatf("hartley p=(%0d,%0d)/256 mean %f expected %f", q1, q2, mean, e));
    end

    $display("mechanisms: saturate_S0=%0d saturate_S3=%0d fsm_init=%0d reconfig=%0d runs=%0d",
             n_sat_lo, n_sat_hi, n_init, n_reconfig, n_runs);
    check(n_sat_lo > 0, "FSM saturation at S_0 seen");
    check(n_sat_hi > 0, "FSM saturation at S_3 seen");
    check(n_init > 0, "FSM restart seen");
    check(n_reconfig > 1, "weight reconfiguration seen");
    check(n_runs > 0, "completed runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
