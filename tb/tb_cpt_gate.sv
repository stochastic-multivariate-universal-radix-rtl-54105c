// tb_cpt_gate: random weights, random words and random select; the output
// must be (rnd[sel] < w[sel]). A second phase holds sel and the weights and
// checks that the mean of the output over 4096 random words is w[sel]/256.
module tb_cpt_gate;
  localparam int unsigned NW = 16, W = 8;
  logic [W-1:0] w [NW];
  logic [W-1:0] rnd [NW];
  logic [3:0] sel;
  logic yb;
  int checks = 0, failures = 0;

  cpt_gate #(.NW(NW), .W(W)) dut (.*);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 20000; c++) begin
      foreach (w[t]) begin w[t] = W'($urandom); rnd[t] = W'($urandom); end
      sel = 4'($urandom);
      #1;
      checks++;
      if (yb !== (rnd[sel] < w[sel])) begin
        failures++;
        if (failures < 10) $display("sel %0d w %0d rnd %0d yb %b", sel, w[sel], rnd[sel], yb);
      end
    end
    for (int s = 0; s < NW; s++) begin
      int ones;
      ones = 0;
      sel = 4'(s);
      foreach (w[t]) w[t] = W'(t * 16 + 5);
      for (int c = 0; c < 4096; c++) begin
        foreach (rnd[t]) rnd[t] = W'($urandom);
        #1;
        ones += int'(yb);
      end
      checks++;
      if ((ones / 16.0 - (s * 16 + 5)) > 6.0 || ((s * 16 + 5) - ones / 16.0) > 6.0) begin
        failures++;
        $display("sel %0d mean %f exp %0d", s, ones / 16.0, s * 16 + 5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
