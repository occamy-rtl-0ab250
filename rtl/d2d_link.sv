// One die-to-die link segment: protocol layer, data-link layer, channel
// allocator and N_PHY PHYs, for one bus (wide or narrow).
//
// The slave port takes requests of local masters for the other chiplet, the
// master port issues the other chiplet's requests locally. Pins: per PHY a
// forwarded clock and eight DDR lanes in each direction. Configuration:
// phy_en_i selects the working PHYs (same mask on both chiplets), raw_i runs
// the calibration pattern and phy_err_o reports the PHYs that failed it.
// With the defaults (38 PHYs, 1/8 system clock) the wide segment moves a
// 608-bit packet per PHY clock period. The layering follows Fig. 6 of the
// paper; the segment count per PHY and the parameters are listed in the
// module that instantiates it.
module d2d_link #(
  parameter type req_t = occamy_pkg::wide_req_t,
  parameter type rsp_t = occamy_pkg::wide_rsp_t,
  parameter type q_t   = occamy_pkg::wide_q_t,
  parameter type p_t   = occamy_pkg::wide_p_t,
  parameter int unsigned N_PHY   = 38,
  parameter int unsigned CLK_DIV = 8,
  parameter int unsigned CREDITS = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [N_PHY-1:0] phy_en_i,
  input  logic             raw_i,
  output logic [N_PHY-1:0] phy_err_o,
  input  req_t             slv_req_i,
  output rsp_t             slv_rsp_o,
  output req_t             mst_req_o,
  input  rsp_t             mst_rsp_i,
  output logic [N_PHY-1:0]      tx_clk_o,
  output logic [N_PHY-1:0][7:0] tx_lanes_o,
  input  logic [N_PHY-1:0]      rx_clk_i,
  input  logic [N_PHY-1:0][7:0] rx_lanes_i
);
  localparam int unsigned PL_W  = ($bits(q_t) > $bits(p_t)) ? $bits(q_t) : $bits(p_t);
  localparam int unsigned PKT_W = 16 * N_PHY;

  logic                  tx_valid, tx_cls, tx_ready;
  logic [PL_W-1:0]       tx_pl;
  logic [1:0]            tx_can, rx_valid, rx_ready;
  logic [1:0][PL_W-1:0]  rx_pl;
  logic                  pkt_tx_valid, pkt_tx_ready, pkt_rx_valid;
  logic [PKT_W-1:0]      pkt_tx, pkt_rx;
  logic [N_PHY-1:0]       ptx_valid, ptx_ready, prx_valid;
  logic [N_PHY-1:0][15:0] ptx_data, prx_data;
  logic [1:0][$clog2(CREDITS+1):0] credits;  // status only

  d2d_protocol #(.req_t(req_t), .rsp_t(rsp_t), .q_t(q_t), .p_t(p_t), .PL_W(PL_W)) i_proto (
    .slv_req_i, .slv_rsp_o, .mst_req_o, .mst_rsp_i,
    .tx_valid_o(tx_valid), .tx_cls_o(tx_cls), .tx_pl_o(tx_pl), .tx_ready_i(tx_ready),
    .tx_can_i(tx_can), .rx_valid_i(rx_valid), .rx_pl_i(rx_pl), .rx_ready_o(rx_ready));

  d2d_data_link #(.PL_W(PL_W), .PKT_W(PKT_W), .CREDITS(CREDITS)) i_dl (
    .clk_i, .rst_ni,
    .tx_valid_i(tx_valid), .tx_cls_i(tx_cls), .tx_pl_i(tx_pl), .tx_ready_o(tx_ready),
    .tx_can_o(tx_can), .rx_valid_o(rx_valid), .rx_pl_o(rx_pl), .rx_ready_i(rx_ready),
    .pkt_valid_o(pkt_tx_valid), .pkt_o(pkt_tx), .pkt_ready_i(pkt_tx_ready),
    .pkt_valid_i(pkt_rx_valid), .pkt_i(pkt_rx), .credits_o(credits));

  d2d_chan_alloc #(.N_PHY(N_PHY)) i_ca (
    .clk_i, .rst_ni, .phy_en_i, .raw_i, .phy_err_o,
    .tx_pkt_valid_i(pkt_tx_valid), .tx_pkt_i(pkt_tx), .tx_pkt_ready_o(pkt_tx_ready),
    .rx_pkt_valid_o(pkt_rx_valid), .rx_pkt_o(pkt_rx),
    .phy_tx_valid_o(ptx_valid), .phy_tx_data_o(ptx_data), .phy_tx_ready_i(ptx_ready),
    .phy_rx_valid_i(prx_valid), .phy_rx_data_i(prx_data));

  for (genvar i = 0; i < N_PHY; i++) begin : g_phy
    d2d_phy #(.LANES(8), .CLK_DIV(CLK_DIV)) i_phy (
      .clk_i, .rst_ni,
      .tx_valid_i(ptx_valid[i]), .tx_data_i(ptx_data[i]), .tx_ready_o(ptx_ready[i]),
      .tx_clk_o(tx_clk_o[i]), .tx_lanes_o(tx_lanes_o[i]),
      .rx_clk_i(rx_clk_i[i]), .rx_lanes_i(rx_lanes_i[i]),
      .rx_valid_o(prx_valid[i]), .rx_data_o(prx_data[i]));
  end
endmodule
