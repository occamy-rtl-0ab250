// Occamy dual-chiplet system: two identical chiplets side by side, joined
// by their die-to-die links (each chiplet's transmit pins drive the other's
// receive pins, 38 wide PHYs and 1 narrow PHY per direction).
//
// Each chiplet gets its id (0 or 1), which is address bit 40 of its own
// memory space, so every cluster, scratchpad and HBM stack of the system is
// reachable from everywhere through one flat address space. Everything the
// chiplets expect from outside (compute cores, host CPUs, peripherals, HBM
// controllers) is a plain port array indexed by chiplet. Two chiplets on an
// interposer with 38 D2D PHYs each follow the paper; the port bundling is
// this design's choice.
module occamy_system import occamy_pkg::*; #(
  parameter int unsigned N_GRP      = N_GROUPS,
  parameter int unsigned N_CL       = N_CLUSTERS,
  parameter int unsigned BANK_WORDS = 512,
  parameter int unsigned WSPM_B     = 1048576,
  parameter int unsigned NSPM_B     = 524288,
  parameter int unsigned N_WPHY     = 38,
  parameter int unsigned PHY_DIV    = 8
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  core_req_t     core_req_i  [N_CHIPLETS][N_GRP][N_CL][N_CORES],
  output core_rsp_t     core_rsp_o  [N_CHIPLETS][N_GRP][N_CL][N_CORES],
  input  logic          dma_cmd_valid_i [N_CHIPLETS][N_GRP][N_CL],
  input  dma_cmd_t      dma_cmd_i   [N_CHIPLETS][N_GRP][N_CL],
  output logic          dma_cmd_ready_o [N_CHIPLETS][N_GRP][N_CL],
  input  narrow_req_t   core_narrow_req_i [N_CHIPLETS][N_GRP][N_CL],
  output narrow_rsp_t   core_narrow_rsp_o [N_CHIPLETS][N_GRP][N_CL],
  input  narrow_req_t   host_req_i   [N_CHIPLETS],
  output narrow_rsp_t   host_rsp_o   [N_CHIPLETS],
  output narrow_req_t   periph_req_o [N_CHIPLETS],
  input  narrow_rsp_t   periph_rsp_i [N_CHIPLETS],
  input  logic          sys_dma_valid_i [N_CHIPLETS],
  input  dma_cmd_t      sys_dma_cmd_i   [N_CHIPLETS],
  output logic          sys_dma_ready_o [N_CHIPLETS],
  output wide_req_t     hbm_req_o    [N_CHIPLETS][N_HBM_CH],
  input  wide_rsp_t     hbm_rsp_i    [N_CHIPLETS][N_HBM_CH],
  output logic          hbm_clk_en_o [N_CHIPLETS],
  output logic [N_GRP-1:0] cc_hit_o       [N_CHIPLETS],
  output logic [N_GRP-1:0] cc_miss_o      [N_CHIPLETS],
  output logic [N_GRP-1:0] tlb_denied_o   [N_CHIPLETS],
  output logic [N_GRP-1:0] grp_isolated_o [N_CHIPLETS],
  // observation of the die-to-die wires
  output logic [N_CHIPLETS-1:0][N_WPHY-1:0] d2d_w_clk_o,
  output logic [N_CHIPLETS-1:0]             d2d_n_clk_o
);
  logic [N_WPHY-1:0]      w_clk   [N_CHIPLETS];
  logic [N_WPHY-1:0][7:0] w_lanes [N_CHIPLETS];
  logic [0:0]             n_clk   [N_CHIPLETS];
  logic [0:0][7:0]        n_lanes [N_CHIPLETS];

  for (genvar c = 0; c < N_CHIPLETS; c++) begin : g_chip
    occamy_chiplet #(
      .N_GRP(N_GRP), .N_CL(N_CL), .BANK_WORDS(BANK_WORDS), .WSPM_B(WSPM_B),
      .NSPM_B(NSPM_B), .N_HBM(N_HBM_CH), .N_WPHY(N_WPHY), .N_NPHY(1), .PHY_DIV(PHY_DIV)
    ) i_chiplet (
      .clk_i, .rst_ni, .chip_id_i(1'(c)),
      .core_req_i(core_req_i[c]), .core_rsp_o(core_rsp_o[c]),
      .dma_cmd_valid_i(dma_cmd_valid_i[c]), .dma_cmd_i(dma_cmd_i[c]),
      .dma_cmd_ready_o(dma_cmd_ready_o[c]),
      .core_narrow_req_i(core_narrow_req_i[c]), .core_narrow_rsp_o(core_narrow_rsp_o[c]),
      .host_req_i(host_req_i[c]), .host_rsp_o(host_rsp_o[c]),
      .periph_req_o(periph_req_o[c]), .periph_rsp_i(periph_rsp_i[c]),
      .sys_dma_valid_i(sys_dma_valid_i[c]), .sys_dma_cmd_i(sys_dma_cmd_i[c]),
      .sys_dma_ready_o(sys_dma_ready_o[c]),
      .hbm_req_o(hbm_req_o[c]), .hbm_rsp_i(hbm_rsp_i[c]), .hbm_clk_en_o(hbm_clk_en_o[c]),
      .d2d_w_tx_clk_o(w_clk[c]), .d2d_w_tx_o(w_lanes[c]),
      .d2d_w_rx_clk_i(w_clk[1-c]), .d2d_w_rx_i(w_lanes[1-c]),
      .d2d_n_tx_clk_o(n_clk[c]), .d2d_n_tx_o(n_lanes[c]),
      .d2d_n_rx_clk_i(n_clk[1-c]), .d2d_n_rx_i(n_lanes[1-c]),
      .cc_hit_o(cc_hit_o[c]), .cc_miss_o(cc_miss_o[c]), .tlb_denied_o(tlb_denied_o[c]),
      .grp_isolated_o(grp_isolated_o[c]));
    assign d2d_w_clk_o[c] = w_clk[c];
    assign d2d_n_clk_o[c] = n_clk[c][0];
  end
endmodule
