// Testbench of clk_gate: counts gated clock edges for random enable
// patterns; the enable is sampled while the clock is low, so the gated clock
// has exactly one full pulse per enabled cycle and no glitches.
module tb_clk_gate;
  logic clk = 0, en, ten, gclk;
  int checks = 0, failures = 0, edges = 0, expect_edges = 0;
  clk_gate dut (.clk_i(clk), .en_i(en), .test_en_i(ten), .clk_o(gclk));
  always #5 clk = ~clk;
  always @(posedge gclk) edges++;
  initial begin #200000 $display("watchdog"); $fatal(1); end
  // glitch check: the gated clock may only change together with clk
  always @(gclk) begin
    checks++;
    if (gclk && !clk) begin failures++; $display("glitch at %0t", $time); end
  end
  initial begin
    en = 0; ten = 0;
    @(negedge clk);
    for (int n = 0; n < 1000; n++) begin
      en = ($urandom % 2 == 0);
      ten = (n > 900);
      #2 en = en ^ ($urandom % 2 == 0) ? en : en;  // stays stable, enable settles mid-low-phase
      if (en || ten) expect_edges++;
      @(negedge clk);
    end
    checks++;
    if (edges != expect_edges) begin failures++; $display("edges %0d exp %0d", edges, expect_edges); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
