// Testbench of d2d_chan_alloc: two allocators with 38 PHYs each, wired back
// to back through real d2d_phy instances. For random masks of working PHYs
// (the same on both sides) random 608-bit packets must arrive intact and in
// order, and a stream of packets must take ceil(38/k) PHY periods per
// packet, i.e. bandwidth falls linearly with the disabled PHYs. In raw mode
// a lane of PHY 5 is tied low between the chiplets: exactly that PHY must be
// flagged.
module tb_d2d_chan_alloc;
  localparam int N = 38;
  logic clk = 0, rst_n = 0, raw;
  logic [N-1:0] en, err_a, err_b;
  logic tv, tr, rv, dummy_tr, dummy_rv;
  logic [16*N-1:0] tp, rp, dummy_rp;
  logic [N-1:0] a_tv, a_tr, a_rv, b_tv, b_tr, b_rv;
  logic [N-1:0][15:0] a_td, a_rd, b_td, b_rd;
  logic [N-1:0] a_clk, b_clk;
  logic [N-1:0][7:0] a_l, b_l, a_l_wire;
  logic stuck;
  int checks = 0, failures = 0;
  logic [16*N-1:0] q [$];

  d2d_chan_alloc #(.N_PHY(N)) i_a (.clk_i(clk), .rst_ni(rst_n), .phy_en_i(en), .raw_i(raw),
    .phy_err_o(err_a), .tx_pkt_valid_i(tv), .tx_pkt_i(tp), .tx_pkt_ready_o(tr),
    .rx_pkt_valid_o(dummy_rv), .rx_pkt_o(dummy_rp),
    .phy_tx_valid_o(a_tv), .phy_tx_data_o(a_td), .phy_tx_ready_i(a_tr),
    .phy_rx_valid_i(a_rv), .phy_rx_data_i(a_rd));
  d2d_chan_alloc #(.N_PHY(N)) i_b (.clk_i(clk), .rst_ni(rst_n), .phy_en_i(en), .raw_i(raw),
    .phy_err_o(err_b), .tx_pkt_valid_i(1'b0), .tx_pkt_i('0), .tx_pkt_ready_o(dummy_tr),
    .rx_pkt_valid_o(rv), .rx_pkt_o(rp),
    .phy_tx_valid_o(b_tv), .phy_tx_data_o(b_td), .phy_tx_ready_i(b_tr),
    .phy_rx_valid_i(b_rv), .phy_rx_data_i(b_rd));
  for (genvar i = 0; i < N; i++) begin : g_phy
    assign a_l_wire[i] = (stuck && i == 5) ? (a_l[i] & 8'hfb) : a_l[i];
    d2d_phy i_pa (.clk_i(clk), .rst_ni(rst_n), .tx_valid_i(a_tv[i]), .tx_data_i(a_td[i]),
      .tx_ready_o(a_tr[i]), .tx_clk_o(a_clk[i]), .tx_lanes_o(a_l[i]), .rx_clk_i(b_clk[i]),
      .rx_lanes_i(b_l[i]), .rx_valid_o(a_rv[i]), .rx_data_o(a_rd[i]));
    d2d_phy i_pb (.clk_i(clk), .rst_ni(rst_n), .tx_valid_i(b_tv[i]), .tx_data_i(b_td[i]),
      .tx_ready_o(b_tr[i]), .tx_clk_o(b_clk[i]), .tx_lanes_o(b_l[i]), .rx_clk_i(a_clk[i]),
      .rx_lanes_i(a_l_wire[i]), .rx_valid_o(b_rv[i]), .rx_data_o(b_rd[i]));
  end
  always #1 clk = ~clk;
  initial begin #4000000 $display("watchdog"); $fatal(1); end

  int got = 0;
  always @(posedge clk) if (rst_n) begin
    if (tv && tr) q.push_back(tp);
    if (rv) begin
      checks++; got++;
      if (q.size() == 0 || q.pop_front() != rp) begin failures++; $display("packet %0d differs", got); end
    end
  end
  bit go = 0;
  always @(posedge clk) begin
    if (!rst_n) begin tv <= 0; tp <= '0; end
    else if (!tv || tr) begin
      tv <= go;
      for (int i = 0; i < N; i++) tp[16*i +: 16] <= 16'($urandom);
    end
  end

  initial begin
    raw = 0; en = '1; stuck = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      int k, g0, c0, rounds;
      case (t)
        0: en = '1;
        1: en = {N{1'b1}} ^ (N'(1) << 5);
        2: en = 38'h00_ffff_ffff >> 13;
        3: en = N'(1);
        default: begin en = {$urandom, $urandom}; if (en == 0) en = 1; end
      endcase
      k = $countones(en);
      rounds = (N + k - 1) / k;
      go = 1;
      repeat (30 + 2 * 8 * rounds) @(negedge clk);
      g0 = got; c0 = 0;
      repeat (8 * 8 * rounds) @(negedge clk);
      // 8 packets expected in 8 * rounds PHY periods (allow one less)
      checks++;
      if (got - g0 < 7 || got - g0 > 8) begin failures++; $display("k=%0d: %0d packets, expected 8", k, got - g0); end
      go = 0;
      repeat (40 + 8 * rounds) @(negedge clk);
      checks++;
      if (q.size() != 0) begin failures++; $display("k=%0d: %0d packets missing", k, q.size()); end
      q.delete();
    end
    // calibration: raw mode with one faulty lane on PHY 5 (chiplet a -> b)
    en = '1; stuck = 1; raw = 1;
    repeat (2000) @(negedge clk);
    checks++;
    if (err_b != (N'(1) << 5)) begin failures++; $display("raw mode flags %h", err_b); end
    checks++;
    if (err_a != 0) begin failures++; $display("raw mode flags reverse %h", err_a); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
