// tb_chain_fsm: the chain FSM against a cycle-accurate model and against the
// steady-state law.
// Part 1: random xb and occasional init; every next state compared with the
// model (saturating +1 / -1, init to 0).
// Part 2: for several p, drive xb = 1 with probability p for 40000 cycles and
// compare each state's occupancy with t^i / sum_k t^k, t = p/(1-p).
module tb_chain_fsm;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 1, init = 0, xb = 0;
  logic [1:0] state;
  int checks = 0, failures = 0;
  int unsigned edge_lo = 0, edge_hi = 0;

  chain_fsm #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  // Reset starts high so that its fall is a real edge.
  initial #1 rst_n = 0;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int model;
    real ps [4] = '{0.2, 0.5, 0.65, 0.8};
    repeat (2) @(posedge clk);
    #1;
    checks++; if (state !== 0) failures++;
    rst_n = 1;
    model = 0;
    for (int c = 0; c < 3000; c++) begin
      xb = ($urandom % 2) != 0;
      init = ($urandom % 50) == 0;
      @(posedge clk); #1;
      if (init) model = 0;
      else if (xb) begin if (model == N-1) edge_hi++; else model++; end
      else begin if (model == 0) edge_lo++; else model--; end
      checks++;
      if (int'(state) != model) begin
        failures++;
        if (failures < 10) $display("c%0d state %0d exp %0d", c, state, model);
      end
    end
    checks++; if (edge_lo == 0 || edge_hi == 0) failures++;
    init = 0;
    foreach (ps[q]) begin
      int unsigned occ [N];
      real t, norm, p_exp, p_got;
      foreach (occ[i]) occ[i] = 0;
      for (int c = 0; c < 40000; c++) begin
        xb = ($urandom % 10000) < int'(ps[q] * 10000);
        @(posedge clk); #1;
        occ[state]++;
      end
      t = ps[q] / (1.0 - ps[q]);
      norm = 0; for (int i = 0; i < N; i++) norm += t ** i;
      for (int i = 0; i < N; i++) begin
        p_exp = (t ** i) / norm;
        p_got = real'(occ[i]) / 40000.0;
        checks++;
        if (p_got - p_exp > 0.02 || p_exp - p_got > 0.02) begin
          failures++;
          $display("p=%f state %0d occupancy %f expected %f", ps[q], i, p_got, p_exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
