// tb_rng_delay_line: drives the tap network from a running lfsr_rng and
// checks every tap against the generator's own word sequence rnd(n):
//   input tap j at cycle n     must equal rnd(n + j*SPACING)
//   weight tap t at cycle n    must equal rnd(n + M*SPACING + NW - 1 - t)
// (weight taps only once the register chain has filled, n >= t). Words are
// logged for CYC cycles and compared afterwards. The taps must also look
// independent: the fraction of cycles on which tap 0 and another tap are
// both below 128 must be near 1/4.
module tb_rng_delay_line;
  localparam int unsigned W = 8, M = 3, NW = 5, SPACING = 5;
  localparam int unsigned TAPS = M + NW, CYC = 4000;
  localparam int unsigned AHEAD = M * SPACING + NW;   // longest look-ahead + 1
  logic clk = 0, rst_n = 1;
  logic [W-1:0] rnd;
  logic [31:0] state;
  logic [W-1:0] taps [TAPS];
  int checks = 0, failures = 0;
  logic [W-1:0] rnd_at [CYC + AHEAD];
  logic [W-1:0] tap_at [CYC][TAPS];

  lfsr_rng #(.W(W)) u_rng (.clk, .rst_n, .rnd, .state);
  rng_delay_line #(.W(W), .M(M), .NW(NW), .SPACING(SPACING)) dut (.clk, .rst_n, .state, .taps);

  always #5 clk = ~clk;

  // Reset starts high so that its fall is a real edge.
  initial #1 rst_n = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int both [TAPS];
    int unsigned want;
    foreach (both[k]) both[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < CYC + AHEAD; c++) begin
      rnd_at[c] = rnd;
      if (c < CYC) for (int k = 0; k < TAPS; k++) tap_at[c][k] = taps[k];
      @(negedge clk);
    end
    for (int c = 0; c < CYC; c++) begin
      for (int k = 0; k < TAPS; k++) begin
        if (k >= M && c < k - M) continue;
        want = (k < M) ? c + k * SPACING : c + M * SPACING + NW - 1 - (k - M);
        checks++;
        if (tap_at[c][k] !== rnd_at[want]) begin
          failures++;
          if (failures < 10) $display("c%0d tap%0d %h expected rnd(%0d) %h", c, k, tap_at[c][k], want, rnd_at[want]);
        end
        if (k > 0 && tap_at[c][k][W-1] == 1'b0 && tap_at[c][0][W-1] == 1'b0) both[k]++;
      end
    end
    for (int k = 1; k < TAPS; k++) begin
      checks++;
      if (both[k] < 850 || both[k] > 1150) begin
        failures++;
        $display("taps 0 and %0d both low on %0d of %0d cycles", k, both[k], CYC);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
