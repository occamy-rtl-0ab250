// One Occamy chiplet: six compute groups, the chiplet interconnect, the
// wide and narrow scratchpads, the control registers, a chiplet DMA engine,
// the HBM channel ports and both die-to-die link segments.
//
// Wide (512 bit) network:
//   group g wide out -> demux: local HBM -> HBM crossbar, else -> group crossbar
//   group crossbar (6 groups + system port in, 6 groups + system port out):
//     cluster windows -> owning group, everything else -> system crossbar
//   HBM crossbar (6 groups + system in, 8 channel ports out), page
//     interleaving selectable in the registers
//   system crossbar, masters: group crossbar, D2D wide segment, narrow->wide
//     converter, chiplet DMA read and write; slaves: 1 MiB wide SPM, D2D wide
//     segment, wide->narrow converter, HBM crossbar, group crossbar.
//     The other chiplet's addresses (address bit 40 differs) go over D2D.
// Narrow (64 bit) network, one crossbar: masters are the host port, the six
//   groups, the D2D narrow segment and the wide->narrow converter; slaves are
//   the 512 KiB narrow SPM, the six groups, the D2D narrow segment, the
//   narrow->wide converter, the peripheral port and the control registers.
// Register slices (mem_cut) sit on every crossbar-to-crossbar link so no
// combinational path closes a loop. The host CPU, peripherals and the HBM
// controllers are outside this module: host_*, periph_* and hbm_* are plain
// bus ports. The D2D segments run on a gated clock (register 0x830).
// The structure follows Fig. 1 and Fig. 5 of the paper; the address map
// (see occamy_pkg) and the exact crossbar partitioning are this design's.
module occamy_chiplet import occamy_pkg::*; #(
  parameter int unsigned N_GRP      = N_GROUPS,
  parameter int unsigned N_CL       = N_CLUSTERS,
  parameter int unsigned BANK_WORDS = 512,
  parameter int unsigned WSPM_B     = 1048576,
  parameter int unsigned NSPM_B     = 524288,
  parameter int unsigned N_HBM      = N_HBM_CH,
  parameter int unsigned N_WPHY     = 38,
  parameter int unsigned N_NPHY     = 1,
  parameter int unsigned PHY_DIV    = 8
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          chip_id_i,
  // compute cores (not modelled here) of every cluster
  input  core_req_t     core_req_i  [N_GRP][N_CL][N_CORES],
  output core_rsp_t     core_rsp_o  [N_GRP][N_CL][N_CORES],
  input  logic          dma_cmd_valid_i [N_GRP][N_CL],
  input  dma_cmd_t      dma_cmd_i   [N_GRP][N_CL],
  output logic          dma_cmd_ready_o [N_GRP][N_CL],
  input  narrow_req_t   core_narrow_req_i [N_GRP][N_CL],
  output narrow_rsp_t   core_narrow_rsp_o [N_GRP][N_CL],
  // host CPU master port and peripheral slave port (64 bit)
  input  narrow_req_t   host_req_i,
  output narrow_rsp_t   host_rsp_o,
  output narrow_req_t   periph_req_o,
  input  narrow_rsp_t   periph_rsp_i,
  // chiplet DMA
  input  logic          sys_dma_valid_i,
  input  dma_cmd_t      sys_dma_cmd_i,
  output logic          sys_dma_ready_o,
  // HBM2E channels (controller outside), addresses are channel offsets
  output wide_req_t     hbm_req_o [N_HBM],
  input  wide_rsp_t     hbm_rsp_i [N_HBM],
  output logic          hbm_clk_en_o,
  // die-to-die pins
  output logic [N_WPHY-1:0]      d2d_w_tx_clk_o,
  output logic [N_WPHY-1:0][7:0] d2d_w_tx_o,
  input  logic [N_WPHY-1:0]      d2d_w_rx_clk_i,
  input  logic [N_WPHY-1:0][7:0] d2d_w_rx_i,
  output logic [N_NPHY-1:0]      d2d_n_tx_clk_o,
  output logic [N_NPHY-1:0][7:0] d2d_n_tx_o,
  input  logic [N_NPHY-1:0]      d2d_n_rx_clk_i,
  input  logic [N_NPHY-1:0][7:0] d2d_n_rx_i,
  // status for observation
  output logic [N_GRP-1:0] cc_hit_o,
  output logic [N_GRP-1:0] cc_miss_o,
  output logic [N_GRP-1:0] tlb_denied_o,
  output logic [N_GRP-1:0] grp_isolated_o
);
  localparam int unsigned GB = $clog2(N_GRP + 1);
  localparam int unsigned HB = $clog2(N_HBM);

  // ---------------- address decoding ----------------
  typedef enum logic [2:0] {
    R_CLUSTER, R_HBM, R_WSPM, R_NSPM, R_REGS, R_PERIPH, R_REMOTE, R_OTHER
  } region_e;

  function automatic region_e region(logic [AW-1:0] a, logic chip);
    logic [AW-1:0] l;
    l = a;
    l[CHIP_BIT] = 1'b0;
    if (a[CHIP_BIT] != chip) return R_REMOTE;
    if (l >= HBM_BASE && l < HBM_BASE + (AW'(1) << HBM_BITS)) return R_HBM;
    if (l >= CLUSTER_BASE && l < CLUSTER_BASE + (AW'(N_GRP * N_CL) << CLUSTER_SHIFT)) return R_CLUSTER;
    if (l >= WSPM_BASE && l < WSPM_BASE + AW'(WSPM_B)) return R_WSPM;
    if (l >= NSPM_BASE && l < NSPM_BASE + AW'(NSPM_B)) return R_NSPM;
    if (l >= SOC_REGS_BASE && l < SOC_REGS_BASE + AW'(32'h1_0000)) return R_REGS;
    if (l >= PERIPH_BASE && l < PERIPH_BASE + AW'(32'h100_0000)) return R_PERIPH;
    return R_OTHER;
  endfunction

  function automatic logic [GB-1:0] group_of(logic [AW-1:0] a);
    logic [AW-1:0] l;
    l = a;
    l[CHIP_BIT] = 1'b0;
    return GB'((l - CLUSTER_BASE) >> (CLUSTER_SHIFT + $clog2(N_CL)));
  endfunction

  // ---------------- control registers ----------------
  group_cfg_t          grp_cfg [N_GRP];
  logic                hbm_il, d2d_clk_en;
  logic [N_WPHY-1:0]   wphy_en, wphy_err;
  logic [N_NPHY-1:0]   nphy_en, nphy_err;
  logic [1:0]          d2d_raw;
  narrow_req_t         regs_req;
  narrow_rsp_t         regs_rsp;

  soc_regs #(.N_GRP(N_GRP), .N_WPHY(N_WPHY), .N_NPHY(N_NPHY)) i_regs (
    .clk_i, .rst_ni, .chip_id_i, .slv_req_i(regs_req), .slv_rsp_o(regs_rsp),
    .grp_cfg_o(grp_cfg), .grp_isolated_i(grp_isolated_o), .hbm_interleave_o(hbm_il),
    .wide_phy_en_o(wphy_en), .narrow_phy_en_o(nphy_en), .d2d_raw_o(d2d_raw),
    .wide_phy_err_i(wphy_err), .narrow_phy_err_i(nphy_err),
    .d2d_clk_en_o(d2d_clk_en), .hbm_clk_en_o(hbm_clk_en_o));

  // ---------------- groups ----------------
  wide_req_t   g_wout_req [N_GRP], g_win_req [N_GRP];
  wide_rsp_t   g_wout_rsp [N_GRP], g_win_rsp [N_GRP];
  narrow_req_t g_nout_req [N_GRP], g_nin_req [N_GRP];
  narrow_rsp_t g_nout_rsp [N_GRP], g_nin_rsp [N_GRP];

  for (genvar g = 0; g < N_GRP; g++) begin : g_grp
    logic [N_CL-1:0] dvalid, dready;
    for (genvar k = 0; k < N_CL; k++) begin : g_k
      assign dvalid[k] = dma_cmd_valid_i[g][k];
      assign dma_cmd_ready_o[g][k] = dready[k];
    end
    occamy_group #(.N_CLUSTERS(N_CL), .BANK_WORDS(BANK_WORDS)) i_group (
      .clk_i, .rst_ni, .chip_id_i, .group_idx_i(3'(g)), .cfg_i(grp_cfg[g]),
      .core_req_i(core_req_i[g]), .core_rsp_o(core_rsp_o[g]),
      .dma_cmd_valid_i(dvalid), .dma_cmd_i(dma_cmd_i[g]), .dma_cmd_ready_o(dready),
      .core_narrow_req_i(core_narrow_req_i[g]), .core_narrow_rsp_o(core_narrow_rsp_o[g]),
      .wide_out_req_o(g_wout_req[g]), .wide_out_rsp_i(g_wout_rsp[g]),
      .wide_in_req_i(g_win_req[g]), .wide_in_rsp_o(g_win_rsp[g]),
      .narrow_out_req_o(g_nout_req[g]), .narrow_out_rsp_i(g_nout_rsp[g]),
      .narrow_in_req_i(g_nin_req[g]), .narrow_in_rsp_o(g_nin_rsp[g]),
      .cc_hit_o(cc_hit_o[g]), .cc_miss_o(cc_miss_o[g]), .tlb_denied_o(tlb_denied_o[g]),
      .isolated_o(grp_isolated_o[g]));
  end

  // ---------------- group output demultiplexers ----------------
  wide_req_t gx_sreq [N_GRP+1], gx_mreq [N_GRP+1];   // group crossbar
  wide_rsp_t gx_srsp [N_GRP+1], gx_mrsp [N_GRP+1];
  logic [GB-1:0] gx_sel [N_GRP+1];
  wide_req_t hx_sreq [N_GRP+1], hx_mreq [N_HBM];     // HBM crossbar
  wide_rsp_t hx_srsp [N_GRP+1], hx_mrsp [N_HBM];
  logic [HB-1:0] hx_sel [N_GRP+1];
  wide_req_t hx_in_req [N_GRP+1];
  wide_rsp_t hx_in_rsp [N_GRP+1];

  for (genvar g = 0; g < N_GRP; g++) begin : g_demux
    wide_req_t d_req [1], d_out_req [2];
    wide_rsp_t d_rsp [1], d_out_rsp [2];
    logic      d_sel [1];
    mem_cut #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_cut_wout (
      .clk_i, .rst_ni, .slv_req_i(g_wout_req[g]), .slv_rsp_o(g_wout_rsp[g]),
      .mst_req_o(d_req[0]), .mst_rsp_i(d_rsp[0]));
    assign d_sel[0]  = (region(d_req[0].q.addr, chip_id_i) == R_HBM);
    mem_xbar #(.NM(1), .NS(2), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_demux (
      .clk_i, .rst_ni, .slv_req_i(d_req), .slv_rsp_o(d_rsp), .sel_i(d_sel),
      .mst_req_o(d_out_req), .mst_rsp_i(d_out_rsp));
    assign gx_sreq[g]    = d_out_req[0];
    assign d_out_rsp[0]  = gx_srsp[g];
    assign hx_in_req[g]  = d_out_req[1];
    assign d_out_rsp[1]  = hx_in_rsp[g];
    // register slice into the group: the group's crossbars are not
    // combinationally chained with the chiplet crossbars
    mem_cut #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_cut_win (
      .clk_i, .rst_ni, .slv_req_i(gx_mreq[g]), .slv_rsp_o(gx_mrsp[g]),
      .mst_req_o(g_win_req[g]), .mst_rsp_i(g_win_rsp[g]));
  end

  // ---------------- wide group crossbar ----------------
  for (genvar p = 0; p <= N_GRP; p++) begin : g_gx_sel
    always_comb begin
      if (region(gx_sreq[p].q.addr, chip_id_i) == R_CLUSTER && p != N_GRP)
        gx_sel[p] = group_of(gx_sreq[p].q.addr);
      else if (region(gx_sreq[p].q.addr, chip_id_i) == R_CLUSTER)
        gx_sel[p] = group_of(gx_sreq[p].q.addr);
      else
        gx_sel[p] = GB'(N_GRP);
    end
  end
  mem_xbar #(.NM(N_GRP+1), .NS(N_GRP+1), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_group_xbar (
    .clk_i, .rst_ni, .slv_req_i(gx_sreq), .slv_rsp_o(gx_srsp), .sel_i(gx_sel),
    .mst_req_o(gx_mreq), .mst_rsp_i(gx_mrsp));

  // ---------------- HBM crossbar with page interleaving ----------------
  for (genvar p = 0; p <= N_GRP; p++) begin : g_hx_in
    logic [HBM_BITS-1:0] ch_addr;
    hbm_interleave #(.N_CH(N_HBM), .HBM_BITS(HBM_BITS), .PAGE_BITS(PAGE_BITS)) i_il (
      .interleave_i(hbm_il), .addr_i(hx_in_req[p].q.addr[HBM_BITS-1:0]),
      .ch_o(hx_sel[p]), .ch_addr_o(ch_addr));
    always_comb begin
      hx_sreq[p]        = hx_in_req[p];
      hx_sreq[p].q.addr = AW'(ch_addr);
    end
    assign hx_in_rsp[p] = hx_srsp[p];
  end
  mem_xbar #(.NM(N_GRP+1), .NS(N_HBM), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_hbm_xbar (
    .clk_i, .rst_ni, .slv_req_i(hx_sreq), .slv_rsp_o(hx_srsp), .sel_i(hx_sel),
    .mst_req_o(hx_mreq), .mst_rsp_i(hx_mrsp));
  assign hbm_req_o = hx_mreq;
  assign hx_mrsp   = hbm_rsp_i;

  // ---------------- system crossbar ----------------
  localparam int unsigned SM_GX = 0, SM_D2D = 1, SM_UP = 2, SM_DMAR = 3, SM_DMAW = 4;
  localparam int unsigned SS_WSPM = 0, SS_D2D = 1, SS_DOWN = 2, SS_HBM = 3, SS_GX = 4;
  wide_req_t sx_sreq [5], sx_mreq [5];
  wide_rsp_t sx_srsp [5], sx_mrsp [5];
  logic [2:0] sx_sel [5];

  for (genvar p = 0; p < 5; p++) begin : g_sx_sel
    always_comb begin
      unique case (region(sx_sreq[p].q.addr, chip_id_i))
        R_REMOTE:  sx_sel[p] = 3'(SS_D2D);
        R_HBM:     sx_sel[p] = 3'(SS_HBM);
        R_CLUSTER: sx_sel[p] = 3'(SS_GX);
        R_WSPM:    sx_sel[p] = 3'(SS_WSPM);
        default:   sx_sel[p] = 3'(SS_DOWN);
      endcase
    end
  end
  mem_xbar #(.NM(5), .NS(5), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_sys_xbar (
    .clk_i, .rst_ni, .slv_req_i(sx_sreq), .slv_rsp_o(sx_srsp), .sel_i(sx_sel),
    .mst_req_o(sx_mreq), .mst_rsp_i(sx_mrsp));

  // links between the group crossbar and the system crossbar
  mem_cut #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_cut_gx2sx (
    .clk_i, .rst_ni, .slv_req_i(gx_mreq[N_GRP]), .slv_rsp_o(gx_mrsp[N_GRP]),
    .mst_req_o(sx_sreq[SM_GX]), .mst_rsp_i(sx_srsp[SM_GX]));
  mem_cut #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_cut_sx2gx (
    .clk_i, .rst_ni, .slv_req_i(sx_mreq[SS_GX]), .slv_rsp_o(sx_mrsp[SS_GX]),
    .mst_req_o(gx_sreq[N_GRP]), .mst_rsp_i(gx_srsp[N_GRP]));
  mem_cut #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_cut_sx2hx (
    .clk_i, .rst_ni, .slv_req_i(sx_mreq[SS_HBM]), .slv_rsp_o(sx_mrsp[SS_HBM]),
    .mst_req_o(hx_in_req[N_GRP]), .mst_rsp_i(hx_in_rsp[N_GRP]));

  // wide scratchpad
  spm_mem #(.BYTES(WSPM_B), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_wspm (
    .clk_i, .rst_ni, .slv_req_i(sx_mreq[SS_WSPM]), .slv_rsp_o(sx_mrsp[SS_WSPM]));

  // chiplet DMA
  logic        sdma_busy, sdma_beat;
  logic [31:0] sdma_done;
  dma_2d #(.BUF_DEPTH(8)) i_sys_dma (
    .clk_i, .rst_ni, .cmd_valid_i(sys_dma_valid_i), .cmd_i(sys_dma_cmd_i),
    .cmd_ready_o(sys_dma_ready_o), .busy_o(sdma_busy), .done_count_o(sdma_done),
    .rd_req_o(sx_sreq[SM_DMAR]), .rd_rsp_i(sx_srsp[SM_DMAR]),
    .wr_req_o(sx_sreq[SM_DMAW]), .wr_rsp_i(sx_srsp[SM_DMAW]), .beat_o(sdma_beat));

  // ---------------- narrow crossbar ----------------
  localparam int unsigned NM_N = N_GRP + 3;  // host, groups, D2D, downsizer
  localparam int unsigned NS_N = N_GRP + 6;  // nspm, groups, D2D, upsizer, periph, regs
  localparam int unsigned NB   = $clog2(NS_N);
  localparam int unsigned NSL_SPM = 0, NSL_D2D = N_GRP + 1, NSL_UP = N_GRP + 2,
                          NSL_PER = N_GRP + 3, NSL_REGS = N_GRP + 4;
  narrow_req_t nx_sreq [NM_N], nx_mreq [NS_N];
  narrow_rsp_t nx_srsp [NM_N], nx_mrsp [NS_N];
  logic [NB-1:0] nx_sel [NM_N];

  for (genvar p = 0; p < NM_N; p++) begin : g_nx_sel
    always_comb begin
      unique case (region(nx_sreq[p].q.addr, chip_id_i))
        R_REMOTE:  nx_sel[p] = NB'(NSL_D2D);
        R_CLUSTER: nx_sel[p] = NB'(group_of(nx_sreq[p].q.addr)) + NB'(1);
        R_NSPM:    nx_sel[p] = NB'(NSL_SPM);
        R_REGS:    nx_sel[p] = NB'(NSL_REGS);
        R_PERIPH:  nx_sel[p] = NB'(NSL_PER);
        R_OTHER:   nx_sel[p] = NB'(NSL_PER);
        default:   nx_sel[p] = NB'(NSL_UP);   // HBM, wide SPM
      endcase
    end
  end

  assign nx_sreq[0]  = host_req_i;
  assign host_rsp_o  = nx_srsp[0];
  for (genvar g = 0; g < N_GRP; g++) begin : g_nx_grp
    mem_cut #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_cut_nout (
      .clk_i, .rst_ni, .slv_req_i(g_nout_req[g]), .slv_rsp_o(g_nout_rsp[g]),
      .mst_req_o(nx_sreq[g+1]), .mst_rsp_i(nx_srsp[g+1]));
    mem_cut #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_cut_nin (
      .clk_i, .rst_ni, .slv_req_i(nx_mreq[g+1]), .slv_rsp_o(nx_mrsp[g+1]),
      .mst_req_o(g_nin_req[g]), .mst_rsp_i(g_nin_rsp[g]));
  end
  assign periph_req_o      = nx_mreq[NSL_PER];
  assign nx_mrsp[NSL_PER]  = periph_rsp_i;
  assign regs_req          = nx_mreq[NSL_REGS];
  assign nx_mrsp[NSL_REGS] = regs_rsp;
  // the last slave index (NS_N-1) is unused padding so every port has a home
  assign nx_mrsp[NS_N-1]   = '0;

  mem_xbar #(.NM(NM_N), .NS(NS_N), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_narrow_xbar (
    .clk_i, .rst_ni, .slv_req_i(nx_sreq), .slv_rsp_o(nx_srsp), .sel_i(nx_sel),
    .mst_req_o(nx_mreq), .mst_rsp_i(nx_mrsp));

  spm_mem #(.BYTES(NSPM_B), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_nspm (
    .clk_i, .rst_ni, .slv_req_i(nx_mreq[NSL_SPM]), .slv_rsp_o(nx_mrsp[NSL_SPM]));

  // ---------------- width converters ----------------
  narrow_req_t up_req;
  narrow_rsp_t up_rsp;
  wide_req_t   up_wreq, dn_wreq;
  wide_rsp_t   up_wrsp, dn_wrsp;
  narrow_req_t dn_nreq;
  narrow_rsp_t dn_nrsp;

  mem_cut #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_cut_up (
    .clk_i, .rst_ni, .slv_req_i(nx_mreq[NSL_UP]), .slv_rsp_o(nx_mrsp[NSL_UP]),
    .mst_req_o(up_req), .mst_rsp_i(up_rsp));
  dw_upsizer i_upsizer (
    .slv_req_i(up_req), .slv_rsp_o(up_rsp), .mst_req_o(up_wreq), .mst_rsp_i(up_wrsp));
  assign sx_sreq[SM_UP] = up_wreq;
  assign up_wrsp        = sx_srsp[SM_UP];

  mem_cut #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_cut_down (
    .clk_i, .rst_ni, .slv_req_i(sx_mreq[SS_DOWN]), .slv_rsp_o(sx_mrsp[SS_DOWN]),
    .mst_req_o(dn_wreq), .mst_rsp_i(dn_wrsp));
  dw_downsizer i_downsizer (
    .clk_i, .rst_ni, .slv_req_i(dn_wreq), .slv_rsp_o(dn_wrsp),
    .mst_req_o(dn_nreq), .mst_rsp_i(dn_nrsp));
  assign nx_sreq[N_GRP+2] = dn_nreq;
  assign dn_nrsp          = nx_srsp[N_GRP+2];

  // ---------------- die-to-die link ----------------
  logic d2d_clk;
  clk_gate i_d2d_cg (.clk_i, .en_i(d2d_clk_en), .test_en_i(1'b0), .clk_o(d2d_clk));

  wide_req_t   dw_tx_req, dw_rx_req;
  wide_rsp_t   dw_tx_rsp, dw_rx_rsp;
  narrow_req_t dn_tx_req, dn_rx_req;
  narrow_rsp_t dn_tx_rsp, dn_rx_rsp;

  mem_cut #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_cut_wtx (
    .clk_i, .rst_ni, .slv_req_i(sx_mreq[SS_D2D]), .slv_rsp_o(sx_mrsp[SS_D2D]),
    .mst_req_o(dw_tx_req), .mst_rsp_i(dw_tx_rsp));
  mem_cut #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_cut_wrx (
    .clk_i, .rst_ni, .slv_req_i(dw_rx_req), .slv_rsp_o(dw_rx_rsp),
    .mst_req_o(sx_sreq[SM_D2D]), .mst_rsp_i(sx_srsp[SM_D2D]));
  d2d_link #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .q_t(wide_q_t), .p_t(wide_p_t),
             .N_PHY(N_WPHY), .CLK_DIV(PHY_DIV), .CREDITS(4)) i_d2d_wide (
    .clk_i(d2d_clk), .rst_ni, .phy_en_i(wphy_en), .raw_i(d2d_raw[0]), .phy_err_o(wphy_err),
    .slv_req_i(dw_tx_req), .slv_rsp_o(dw_tx_rsp), .mst_req_o(dw_rx_req), .mst_rsp_i(dw_rx_rsp),
    .tx_clk_o(d2d_w_tx_clk_o), .tx_lanes_o(d2d_w_tx_o),
    .rx_clk_i(d2d_w_rx_clk_i), .rx_lanes_i(d2d_w_rx_i));

  mem_cut #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_cut_ntx (
    .clk_i, .rst_ni, .slv_req_i(nx_mreq[NSL_D2D]), .slv_rsp_o(nx_mrsp[NSL_D2D]),
    .mst_req_o(dn_tx_req), .mst_rsp_i(dn_tx_rsp));
  mem_cut #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_cut_nrx (
    .clk_i, .rst_ni, .slv_req_i(dn_rx_req), .slv_rsp_o(dn_rx_rsp),
    .mst_req_o(nx_sreq[N_GRP+1]), .mst_rsp_i(nx_srsp[N_GRP+1]));
  d2d_link #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .q_t(narrow_q_t), .p_t(narrow_p_t),
             .N_PHY(N_NPHY), .CLK_DIV(PHY_DIV), .CREDITS(4)) i_d2d_narrow (
    .clk_i(d2d_clk), .rst_ni, .phy_en_i(nphy_en), .raw_i(d2d_raw[1]), .phy_err_o(nphy_err),
    .slv_req_i(dn_tx_req), .slv_rsp_o(dn_tx_rsp), .mst_req_o(dn_rx_req), .mst_rsp_i(dn_rx_rsp),
    .tx_clk_o(d2d_n_tx_clk_o), .tx_lanes_o(d2d_n_tx_o),
    .rx_clk_i(d2d_n_rx_clk_i), .rx_lanes_i(d2d_n_rx_i));
endmodule
