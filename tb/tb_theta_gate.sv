// tb_theta_gate: exhaustive check of the comparator (all 2^16 threshold and
// random-word pairs for W = 8) and of the resulting bit probability: with all
// 256 random words, exactly thr of them must give a one.
module tb_theta_gate;
  localparam int unsigned W = 8;
  logic [W-1:0] thr, rnd;
  logic bit_o;
  int checks = 0, failures = 0;

  theta_gate #(.W(W)) dut (.*);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 256; t++) begin
      int ones;
      ones = 0;
      for (int r = 0; r < 256; r++) begin
        thr = W'(t); rnd = W'(r);
        #1;
        checks++;
        if (bit_o !== (r < t)) begin
          failures++;
          if (failures < 10) $display("thr %0d rnd %0d bit %b", t, r, bit_o);
        end
        ones += int'(bit_o);
      end
      checks++;
      if (ones != t) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
