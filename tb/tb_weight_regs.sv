// tb_weight_regs: random writes (including out-of-range addresses) compared
// with a shadow array; after every cycle all NW weights are checked.
module tb_weight_regs;
  localparam int unsigned NW = 12, W = 8;
  logic clk = 0, rst_n = 1, cfg_we = 0;
  logic [3:0] cfg_addr = '0;
  logic [W-1:0] cfg_wdata = '0;
  logic [W-1:0] w [NW];
  logic [W-1:0] shadow [NW];
  int checks = 0, failures = 0;

  weight_regs #(.NW(NW), .W(W)) dut (.*);

  always #5 clk = ~clk;

  // Reset starts high so that its fall is a real edge.
  initial #1 rst_n = 0;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (shadow[t]) shadow[t] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      cfg_we    = ($urandom % 3) != 0;
      cfg_addr  = 4'($urandom);
      cfg_wdata = W'($urandom);
      @(posedge clk); #1;
      if (cfg_we && cfg_addr < NW) shadow[cfg_addr] = cfg_wdata;
      for (int t = 0; t < NW; t++) begin
        checks++;
        if (w[t] !== shadow[t]) begin
          failures++;
          if (failures < 10) $display("c%0d w[%0d]=%h exp %h", c, t, w[t], shadow[t]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
