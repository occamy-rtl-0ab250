// Testbench of d2d_protocol: two protocol layers for the 64-bit bus, each
// on a data-link layer, the two joined by a direct packet channel (no PHYs).
// A random master on each side uses a scratchpad on the other side, so
// request and response payloads of both directions share the link. All
// answers are checked against reference copies, ids must come back
// unchanged, and both payload classes must be seen on the link.
module tb_d2d_protocol;
  import occamy_pkg::*;
  localparam int PL = $bits(narrow_q_t);
  localparam int PK = 64;
  logic clk = 0, rst_n = 0;
  narrow_req_t m_req [2], l_req [2];
  narrow_rsp_t m_rsp [2], l_rsp [2];
  logic [1:0] tv, tc, tr, pv;
  logic [1:0][PL-1:0] tpl;
  logic [1:0][1:0] can, rxv, rxr;
  logic [1:0][1:0][PL-1:0] rxpl;
  logic [1:0][PK-1:0] pk;
  logic [1:0][1:0][3:0] cred;
  int c [2], f [2], d [2], lat [2];
  int n_req = 0, n_rsp = 0;
  for (genvar s = 0; s < 2; s++) begin : g_s
    tbm_master #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .DW(64), .SPAN(4096),
                 .ID(32'(s + 20)), .PCT(60)) i_m (
      .clk_i(clk), .rst_ni(rst_n), .en_i(1'b1), .base_i(48'h0), .req_o(m_req[s]), .rsp_i(m_rsp[s]),
      .checks_o(c[s]), .failures_o(f[s]), .done_o(d[s]), .lat_max_o(lat[s]));
    d2d_protocol #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .q_t(narrow_q_t),
                   .p_t(narrow_p_t), .PL_W(PL)) dut (
      .slv_req_i(m_req[s]), .slv_rsp_o(m_rsp[s]), .mst_req_o(l_req[s]), .mst_rsp_i(l_rsp[s]),
      .tx_valid_o(tv[s]), .tx_cls_o(tc[s]), .tx_pl_o(tpl[s]), .tx_ready_i(tr[s]),
      .tx_can_i(can[s]), .rx_valid_i(rxv[s]), .rx_pl_i(rxpl[s]), .rx_ready_o(rxr[s]));
    d2d_data_link #(.PL_W(PL), .PKT_W(PK), .CREDITS(4)) i_dl (
      .clk_i(clk), .rst_ni(rst_n), .tx_valid_i(tv[s]), .tx_cls_i(tc[s]), .tx_pl_i(tpl[s]),
      .tx_ready_o(tr[s]), .tx_can_o(can[s]), .rx_valid_o(rxv[s]), .rx_pl_o(rxpl[s]),
      .rx_ready_i(rxr[s]), .pkt_valid_o(pv[s]), .pkt_o(pk[s]), .pkt_ready_i(1'b1),
      .pkt_valid_i(pv[1-s]), .pkt_i(pk[1-s]), .credits_o(cred[s]));
    spm_mem #(.BYTES(65536), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_mem (
      .clk_i(clk), .rst_ni(rst_n), .slv_req_i(l_req[s]), .slv_rsp_o(l_rsp[s]));
  end
  always @(posedge clk) if (rst_n) for (int s = 0; s < 2; s++) if (tv[s] && tr[s]) begin
    if (tc[s]) n_rsp++; else n_req++;
  end
  always #1 clk = ~clk;
  initial begin #4000000 $display("watchdog"); $fatal(1); end
  initial begin
    int failures;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (d[0] >= 400 && d[1] >= 400);
    @(negedge clk);
    failures = f[0] + f[1];
    if (n_req < 800 || n_rsp < 800) begin failures++; $display("payloads %0d/%0d", n_req, n_rsp); end
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + 1, failures);
    $finish;
  end
endmodule
