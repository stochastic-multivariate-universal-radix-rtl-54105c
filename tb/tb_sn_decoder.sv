// tb_sn_decoder: feeds random bitstreams of random length (including 0 and 1)
// and checks: fsm_init on the start edge only, busy for L+1 cycles, done one
// cycle exactly L+2 edges after start, ones equal to the number of ones sent
// during the L counted cycles, the count held after done, start while busy
// ignored.
module tb_sn_decoder;
  localparam int unsigned LEN_W = 16;
  logic clk = 0, rst_n = 1, start = 0, yb = 0;
  logic [LEN_W-1:0] stream_len = '0;
  logic fsm_init, busy, done;
  logic [LEN_W-1:0] ones;
  int checks = 0, failures = 0;

  sn_decoder #(.LEN_W(LEN_W)) dut (.*);

  always #5 clk = ~clk;

  // Reset starts high so that its fall is a real edge.
  initial #1 rst_n = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("%t FAIL %s", $time, what);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      int L, exp_ones, cyc;
      L = (run == 0) ? 0 : (run == 1) ? 1 : (run == 2) ? 64 : 1 + ($urandom % 300);
      stream_len = LEN_W'(L);
      if (L == 0) L = 1;
      @(negedge clk);
      start = 1; yb = 0;
      #1 check(fsm_init == 1, "fsm_init with start");
      @(negedge clk);
      start = 0;
      check(busy == 1 && done == 0, "INIT busy");
      exp_ones = 0;
      cyc = 0;
      // INIT cycle: yb here is not counted
      yb = 1;
      @(negedge clk);
      for (int k = 0; k < L; k++) begin
        check(busy == 1 && done == 0, "RUN busy");
        yb = ($urandom % 3) == 0;
        if (yb) exp_ones++;
        if (k == 1) begin start = 1; #1 check(fsm_init == 0, "no init while busy"); end
        @(negedge clk);
        start = 0;
      end
      check(done == 1 && busy == 0, "done after L+2 edges");
      check(int'(ones) == exp_ones, $sformatf("count %0d exp %0d L %0d", ones, exp_ones, L));
      yb = 1;
      @(negedge clk);
      check(done == 0 && busy == 0, "done is one cycle");
      check(int'(ones) == exp_ones, "count held");
      repeat ($urandom % 3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
