// tb_smurf_core: two instances driven by independent random bits.
//   dut : M = 3 chains of N = 3 states (a non-power-of-two radix);
//         sel must be sum_j i_j * 3^(j-1).
//   dutx: M = 3 chains of lengths 2, 5, 3 (mixed radix);
//         sel must be i_1 + 2 * (i_2 + 5 * i_3).
// Each digit is compared with its own saturating-counter model, and every
// codeword value must be reached.
module tb_smurf_core;
  localparam int unsigned M = 3, N = 3;
  logic clk = 0, rst_n = 1, init = 0;
  logic [M-1:0] xb = '0;
  logic [1:0] digits [M];
  logic [4:0] sel;
  int checks = 0, failures = 0;
  int model [M];
  bit seen [27];

  smurf_core #(.M(M), .N(N)) dut (.*);

  localparam smurf_pkg::radix_vec_t RX = '{2, 5, 3, 1, 1, 1, 1, 1};
  logic [M-1:0] xbx = '0;
  logic [2:0] digx [M];
  logic [4:0] selx;
  int modx [M];
  bit seenx [30];

  smurf_core #(.M(M), .N(N), .RADIX(RX)) dutx (.clk, .rst_n, .init, .xb(xbx), .digits(digx), .sel(selx));

  always #5 clk = ~clk;

  // Reset starts high so that its fall is a real edge.
  initial #1 rst_n = 0;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (model[j]) model[j] = 0;
    foreach (modx[j]) modx[j] = 0;
    for (int c = 0; c < 20000; c++) begin
      int idx;
      xb = M'($urandom);
      xbx = M'($urandom);
      init = ($urandom % 200) == 0;
      @(posedge clk); #1;
      for (int j = 0; j < M; j++) begin
        if (init) model[j] = 0;
        else if (xb[j]) model[j] = (model[j] == N-1) ? model[j] : model[j] + 1;
        else            model[j] = (model[j] == 0)   ? 0        : model[j] - 1;
        checks++;
        if (int'(digits[j]) != model[j]) failures++;
      end
      idx = model[0] + 3 * model[1] + 9 * model[2];
      checks++;
      if (int'(sel) != idx) begin
        failures++;
        if (failures < 10) $display("c%0d sel %0d exp %0d", c, sel, idx);
      end
      seen[idx] = 1;
      for (int j = 0; j < M; j++) begin
        if (init) modx[j] = 0;
        else if (xbx[j]) modx[j] = (modx[j] == int'(RX[j]) - 1) ? modx[j] : modx[j] + 1;
        else             modx[j] = (modx[j] == 0) ? 0 : modx[j] - 1;
        checks++;
        if (int'(digx[j]) != modx[j]) failures++;
      end
      idx = modx[0] + 2 * (modx[1] + 5 * modx[2]);
      checks++;
      if (int'(selx) != idx) begin
        failures++;
        if (failures < 10) $display("c%0d mixed sel %0d exp %0d", c, selx, idx);
      end
      seenx[idx] = 1;
    end
    foreach (seen[k]) begin checks++; if (!seen[k]) failures++; end
    foreach (seenx[k]) begin checks++; if (!seenx[k]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
