// Testbench of cluster_barrier: cores arrive at random times; checks that
// the release comes exactly one cycle after the last masked arrival, goes to
// every masked core for one cycle, and that unmasked cores are ignored.
module tb_cluster_barrier;
  logic clk = 0, rst_n = 0;
  logic [8:0] mask, arrive, rel;
  logic [31:0] rounds;
  int checks = 0, failures = 0;
  cluster_barrier #(.N_CORES(9)) dut (.clk_i(clk), .rst_ni(rst_n), .mask_i(mask),
    .arrive_i(arrive), .release_o(rel), .rounds_o(rounds));
  always #1 clk = ~clk;
  initial begin #200000 $display("watchdog"); $fatal(1); end
  initial begin
    mask = '1; arrive = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int t [9];
      int last;
      mask = (r % 4 == 3) ? 9'h0ff : '1;
      last = 0;
      for (int c = 0; c < 9; c++) begin
        t[c] = 1 + $urandom % 10;
        if (mask[c] && t[c] > last) last = t[c];
      end
      for (int cyc = 1; cyc <= last + 1; cyc++) begin
        @(negedge clk);
        for (int c = 0; c < 9; c++) if (cyc == t[c] && mask[c]) arrive[c] = 1;
        checks++;
        if (rel != 0 && cyc <= last) begin failures++; $display("early release r%0d", r); end
      end
      // after the cycle the last core arrived, release must be visible
      checks++;
      if (rel != mask) begin failures++; $display("release %b mask %b", rel, mask); end
      arrive = 0;
      @(negedge clk);
      checks++;
      if (rel != 0) begin failures++; $display("release longer than one cycle"); end
    end
    checks++;
    if (rounds != 40) begin failures++; $display("rounds %0d", rounds); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
