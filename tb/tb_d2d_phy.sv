// Testbench of d2d_phy: two PHYs wired back to back (forwarded clock and
// eight lanes each way). Random words with random gaps must arrive in order;
// a continuous stream must sustain one 16-bit word per CLK_DIV cycles (the
// PHY clock, 8 DDR lanes = 2 Gb/s at 125 MHz), and the forwarded clock must
// stay still while nothing is sent.
module tb_d2d_phy;
  logic clk = 0, rst_n = 0;
  logic a_v, a_r, b_v, b_r, a_clk, b_clk, a_rv, b_rv;
  logic [15:0] a_d, b_d, a_rd, b_rd;
  logic [7:0] a_l, b_l;
  int checks = 0, failures = 0;
  logic [15:0] q_ab [$], q_ba [$];
  d2d_phy #(.LANES(8), .CLK_DIV(8)) i_a (.clk_i(clk), .rst_ni(rst_n), .tx_valid_i(a_v),
    .tx_data_i(a_d), .tx_ready_o(a_r), .tx_clk_o(a_clk), .tx_lanes_o(a_l), .rx_clk_i(b_clk),
    .rx_lanes_i(b_l), .rx_valid_o(a_rv), .rx_data_o(a_rd));
  d2d_phy #(.LANES(8), .CLK_DIV(8)) i_b (.clk_i(clk), .rst_ni(rst_n), .tx_valid_i(b_v),
    .tx_data_i(b_d), .tx_ready_o(b_r), .tx_clk_o(b_clk), .tx_lanes_o(b_l), .rx_clk_i(a_clk),
    .rx_lanes_i(a_l), .rx_valid_o(b_rv), .rx_data_o(b_rd));
  always #1 clk = ~clk;
  initial begin #400000 $display("watchdog"); $fatal(1); end
  int cyc = 0, clk_toggles_idle = 0;
  bit idle_phase = 0;
  logic a_clk_d = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    a_clk_d <= a_clk;
    if (idle_phase && a_clk != a_clk_d) clk_toggles_idle <= clk_toggles_idle + 1;
    if (rst_n && a_v && a_r) q_ab.push_back(a_d);
    if (rst_n && b_v && b_r) q_ba.push_back(b_d);
    if (rst_n && b_rv) begin
      checks++;
      if (q_ab.size() == 0 || q_ab.pop_front() != b_rd) begin failures++; $display("a->b word %h cyc %0d q %0d", b_rd, cyc, q_ab.size()); end
    end
    if (rst_n && a_rv) begin
      checks++;
      if (q_ba.size() == 0 || q_ba.pop_front() != a_rd) begin failures++; $display("b->a word %h", a_rd); end
    end
  end
  // random traffic, clocked driver
  bit stream = 0;
  always @(posedge clk) begin
    if (!rst_n) begin a_v <= 0; b_v <= 0; a_d <= 0; b_d <= 0; end
    else begin
      if (!a_v || a_r) begin a_v <= stream || ($urandom % 3 == 0); a_d <= 16'($urandom); end
      if (!b_v || b_r) begin b_v <= stream || ($urandom % 3 == 0); b_d <= 16'($urandom); end
      if (idle_phase) begin a_v <= 0; b_v <= 0; end
    end
  end
  initial begin
    int t0, n0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (4000) @(negedge clk);
    // sustained rate: 200 words back to back
    stream = 1;
    repeat (20) @(negedge clk);
    n0 = checks; t0 = cyc;
    repeat (1600) @(negedge clk);
    checks++;
    if ((checks - n0 - 1) < 2 * 195) begin failures++; $display("rate %0d words in 1600 cycles", (checks - n0) / 2); end
    stream = 0; idle_phase = 1;
    repeat (40) @(negedge clk);
    clk_toggles_idle = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (clk_toggles_idle != 0) begin failures++; $display("forwarded clock toggles while idle"); end
    checks++;
    if (q_ab.size() != 0 || q_ba.size() != 0) begin failures++; $display("words lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
