// Testbench of d2d_link: two complete wide link segments (38 PHYs each)
// joined pin to pin like the two chiplets. On each side a random master
// reads and writes a scratchpad on the other side through the link, so
// requests and responses travel in both directions at once. Answers are
// checked against reference copies. The round-trip time of an access is
// checked against the link's structure (a frame of 2 packets each way,
// 8 cycles per PHY word plus synchronisation), and the run is repeated with
// half of the PHYs disabled, which must still deliver every access.
module tb_d2d_link;
  import occamy_pkg::*;
  localparam int N = 38;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] en;
  logic [N-1:0] err [2];
  wide_req_t m_req [2], l_req [2];
  wide_rsp_t m_rsp [2], l_rsp [2];
  logic [N-1:0] tclk [2];
  logic [N-1:0][7:0] tl [2];
  int c [2], f [2], d [2], lat [2];
  bit go = 0;
  for (genvar s = 0; s < 2; s++) begin : g_s
    tbm_master #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .DW(512), .SPAN(16384),
                 .ID(32'(s + 9)), .PCT(100)) i_m (
      .clk_i(clk), .rst_ni(rst_n), .en_i(go), .base_i(48'h0), .req_o(m_req[s]), .rsp_i(m_rsp[s]),
      .checks_o(c[s]), .failures_o(f[s]), .done_o(d[s]), .lat_max_o(lat[s]));
    d2d_link #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .q_t(wide_q_t), .p_t(wide_p_t),
               .N_PHY(N), .CLK_DIV(8), .CREDITS(4)) dut (
      .clk_i(clk), .rst_ni(rst_n), .phy_en_i(en), .raw_i(1'b0), .phy_err_o(err[s]),
      .slv_req_i(m_req[s]), .slv_rsp_o(m_rsp[s]), .mst_req_o(l_req[s]), .mst_rsp_i(l_rsp[s]),
      .tx_clk_o(tclk[s]), .tx_lanes_o(tl[s]), .rx_clk_i(tclk[1-s]), .rx_lanes_i(tl[1-s]));
    spm_mem #(.BYTES(65536), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_mem (
      .clk_i(clk), .rst_ni(rst_n), .slv_req_i(l_req[s]), .slv_rsp_o(l_rsp[s]));
  end
  always #1 clk = ~clk;
  initial begin #8000000 $display("watchdog"); $fatal(1); end
  initial begin
    int checks, failures, l_full;
    en = '1;
    repeat (3) @(negedge clk); rst_n = 1;
    go = 1;
    wait (d[0] >= 150 && d[1] >= 150);
    l_full = (lat[0] > lat[1]) ? lat[0] : lat[1];
    $display("round trip with 38 PHYs: %0d cycles", l_full);
    // stop, switch half the PHYs off on both sides, continue
    go = 0;
    repeat (400) @(negedge clk);
    en = {19'h0, 19'h7ffff};
    go = 1;
    wait (d[0] >= 250 && d[1] >= 250);
    $display("round trip with 19 PHYs: %0d cycles", (lat[0] > lat[1]) ? lat[0] : lat[1]);
    @(negedge clk);
    checks = c[0] + c[1] + 2; failures = f[0] + f[1];
    // request and response frames: 2 packets each, 8 cycles per packet,
    // plus synchronisation and register stages; both directions share the
    // link with traffic of the other side
    if (l_full > 120) begin failures++; $display("round trip too long"); end
    if (l_full < 32) begin failures++; $display("round trip impossibly short"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
