// tb_lfsr_rng: checks the random word generator against a bit-serial model.
//
// The reference is a serial model of the recurrence
// u(t) = u(t-32) ^ u(t-22) ^ u(t-2) ^ u(t-1), kept as a bit array. Every
// output word and the whole state must equal the model after W steps per
// clock; the mean word must be near 2^W/2 and zero words must occur about
// once in 256.
module tb_lfsr_rng;
  localparam int unsigned W = 8;
  logic clk = 0, rst_n = 1;
  logic [W-1:0] rnd;
  logic [31:0] state;
  int checks = 0, failures = 0;

  lfsr_rng #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .rnd(rnd), .state(state));

  always #5 clk = ~clk;

  // Reset starts high so that its fall is a real edge.
  initial #1 rst_n = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit model [32];   // model[j] = u(t - j)
  task automatic model_step();
    bit fb;
    fb = model[31] ^ model[21] ^ model[1] ^ model[0];
    for (int k = 31; k > 0; k--) model[k] = model[k-1];
    model[0] = fb;
  endtask

  initial begin
    logic [W-1:0] exp_w;
    longint sum = 0;
    int zeros_seen = 0;
    for (int k = 0; k < 32; k++) model[k] = ((32'hACE1_2B7D >> k) & 1) != 0;
    repeat (3) @(posedge clk);
    #1;
    for (int k = 0; k < W; k++) exp_w[k] = model[k];
    checks++; if (rnd !== exp_w) begin failures++; $display("reset word %h exp %h", rnd, exp_w); end
    rst_n = 1;
    for (int c = 0; c < 4096; c++) begin
      @(posedge clk); #1;
      repeat (W) model_step();
      for (int k = 0; k < W; k++) exp_w[k] = model[k];
      checks++;
      if (rnd !== exp_w) begin
        failures++;
        if (failures < 10) $display("cycle %0d rnd %h exp %h", c, rnd, exp_w);
      end
      for (int k = 0; k < 32; k++) if (state[k] != model[k]) begin failures++; break; end
      checks++;
      sum += rnd;
      if (rnd == 0) zeros_seen++;
    end
    // mean of 4096 uniform 8-bit words is 127.5 +- ~1.2 (1 sigma)
    checks++;
    if (sum < 4096*122 || sum > 4096*133) begin failures++; $display("mean off: %0d", sum/4096); end
    checks++;
    if (zeros_seen == 0 || zeros_seen > 60) begin failures++; $display("zero words %0d", zeros_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
