// Occamy compute group: four clusters sharing a 512-bit and a 64-bit
// crossbar, with one outgoing and one incoming port per network towards
// the chiplet.
//
// Wide (512 bit) crossbar: masters are the four clusters' wide master ports
// and the incoming group port; slaves are the four clusters' wide slave
// ports and the outgoing group port. Addresses inside a cluster window of
// this group go to that cluster, everything else leaves the group. The
// narrow (64 bit) crossbar is built the same way. So clusters of a group
// reach each other at full bandwidth without touching the chiplet network.
//
// Outgoing path, per network: crossbar -> IOTLB (remapping and page
// access control) -> [wide only: 32 KiB constant cache] -> isolation.
// Incoming path: isolation -> register slice -> crossbar.
// The group runs on its own gated clock and reset (cfg_i.clk_en,
// cfg_i.rst_n) and can be cut from the chiplet (cfg_i.isolate); all three
// come from memory-mapped chiplet registers. Both IOTLBs share one set of
// entries, a simplification of this design.
// Cluster k of group g on chiplet c has its window at
// CLUSTER_BASE + c<<40 + (4g+k)<<18.
module occamy_group import occamy_pkg::*; #(
  parameter int unsigned N_CLUSTERS = 4,
  parameter int unsigned BANK_WORDS = 512
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          chip_id_i,
  input  logic [2:0]    group_idx_i,
  input  group_cfg_t    cfg_i,
  input  core_req_t     core_req_i  [N_CLUSTERS][N_CORES],
  output core_rsp_t     core_rsp_o  [N_CLUSTERS][N_CORES],
  input  logic          [N_CLUSTERS-1:0] dma_cmd_valid_i,
  input  dma_cmd_t      dma_cmd_i   [N_CLUSTERS],
  output logic          [N_CLUSTERS-1:0] dma_cmd_ready_o,
  input  narrow_req_t   core_narrow_req_i [N_CLUSTERS],
  output narrow_rsp_t   core_narrow_rsp_o [N_CLUSTERS],
  output wide_req_t     wide_out_req_o,
  input  wide_rsp_t     wide_out_rsp_i,
  input  wide_req_t     wide_in_req_i,
  output wide_rsp_t     wide_in_rsp_o,
  output narrow_req_t   narrow_out_req_o,
  input  narrow_rsp_t   narrow_out_rsp_i,
  input  narrow_req_t   narrow_in_req_i,
  output narrow_rsp_t   narrow_in_rsp_o,
  output logic          cc_hit_o,
  output logic          tlb_denied_o,
  output logic          isolated_o,
  output logic          cc_miss_o
);
  localparam int unsigned NP = N_CLUSTERS + 1;
  localparam int unsigned PB = $clog2(NP);

  logic gclk, grst_n;
  clk_gate i_cg (.clk_i, .en_i(cfg_i.clk_en), .test_en_i(1'b0), .clk_o(gclk));
  assign grst_n = rst_ni & cfg_i.rst_n;

  logic [AW-1:0] grp_base;
  assign grp_base = CLUSTER_BASE | (AW'(chip_id_i) << CHIP_BIT) |
                    (AW'(group_idx_i) * AW'(N_CLUSTERS) << CLUSTER_SHIFT);

  // target port of an address: a cluster of this group, or the outside
  function automatic logic [PB-1:0] route(logic [AW-1:0] a, logic [AW-1:0] base);
    logic [AW-1:0] ofs;
    ofs = a - base;
    if (a >= base && ofs < (AW'(N_CLUSTERS) << CLUSTER_SHIFT))
      return PB'(ofs >> CLUSTER_SHIFT);
    return PB'(N_CLUSTERS);
  endfunction

  wide_req_t   wx_sreq [NP], wx_mreq [NP];
  wide_rsp_t   wx_srsp [NP], wx_mrsp [NP];
  logic [PB-1:0] wx_sel [NP];
  narrow_req_t nx_sreq [NP], nx_mreq [NP];
  narrow_rsp_t nx_srsp [NP], nx_mrsp [NP];
  logic [PB-1:0] nx_sel [NP];

  for (genvar k = 0; k < N_CLUSTERS; k++) begin : g_cluster
    occamy_cluster #(.N_WORKERS(N_WORKERS), .BANK_WORDS(BANK_WORDS), .ICACHE_B(8192)) i_cluster (
      .clk_i(gclk), .rst_ni(grst_n),
      .base_addr_i(grp_base + (AW'(k) << CLUSTER_SHIFT)),
      .core_req_i(core_req_i[k]), .core_rsp_o(core_rsp_o[k]),
      .dma_cmd_valid_i(dma_cmd_valid_i[k]), .dma_cmd_i(dma_cmd_i[k]),
      .dma_cmd_ready_o(dma_cmd_ready_o[k]),
      .core_narrow_req_i(core_narrow_req_i[k]), .core_narrow_rsp_o(core_narrow_rsp_o[k]),
      .narrow_out_req_o(nx_sreq[k]), .narrow_out_rsp_i(nx_srsp[k]),
      .narrow_in_req_i(nx_mreq[k]), .narrow_in_rsp_o(nx_mrsp[k]),
      .wide_in_req_i(wx_mreq[k]), .wide_in_rsp_o(wx_mrsp[k]),
      .wide_out_req_o(wx_sreq[k]), .wide_out_rsp_i(wx_srsp[k]));
  end

  for (genvar p = 0; p < NP; p++) begin : g_sel
    assign wx_sel[p] = route(wx_sreq[p].q.addr, grp_base);
    assign nx_sel[p] = route(nx_sreq[p].q.addr, grp_base);
  end

  mem_xbar #(.NM(NP), .NS(NP), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_wide_xbar (
    .clk_i(gclk), .rst_ni(grst_n), .slv_req_i(wx_sreq), .slv_rsp_o(wx_srsp), .sel_i(wx_sel),
    .mst_req_o(wx_mreq), .mst_rsp_i(wx_mrsp));
  mem_xbar #(.NM(NP), .NS(NP), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_narrow_xbar (
    .clk_i(gclk), .rst_ni(grst_n), .slv_req_i(nx_sreq), .slv_rsp_o(nx_srsp), .sel_i(nx_sel),
    .mst_req_o(nx_mreq), .mst_rsp_i(nx_mrsp));

  // ---------------- incoming ports ----------------
  wide_req_t   win_req;
  wide_rsp_t   win_rsp;
  narrow_req_t nin_req;
  narrow_rsp_t nin_rsp;
  logic iso_w_in, iso_n_in, iso_w_out, iso_n_out;

  mem_isolate #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_iso_win (
    .isolate_i(cfg_i.isolate), .slv_req_i(wide_in_req_i), .slv_rsp_o(wide_in_rsp_o),
    .mst_req_o(win_req), .mst_rsp_i(win_rsp), .isolated_o(iso_w_in));
  mem_cut #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_cut_win (
    .clk_i(gclk), .rst_ni(grst_n), .slv_req_i(win_req), .slv_rsp_o(win_rsp),
    .mst_req_o(wx_sreq[NP-1]), .mst_rsp_i(wx_srsp[NP-1]));
  mem_isolate #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_iso_nin (
    .isolate_i(cfg_i.isolate), .slv_req_i(narrow_in_req_i), .slv_rsp_o(narrow_in_rsp_o),
    .mst_req_o(nin_req), .mst_rsp_i(nin_rsp), .isolated_o(iso_n_in));
  mem_cut #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_cut_nin (
    .clk_i(gclk), .rst_ni(grst_n), .slv_req_i(nin_req), .slv_rsp_o(nin_rsp),
    .mst_req_o(nx_sreq[NP-1]), .mst_rsp_i(nx_srsp[NP-1]));

  // ---------------- outgoing wide port ----------------
  wide_req_t wt_req, cc_req;
  wide_rsp_t wt_rsp, cc_rsp;
  logic      w_denied, n_denied;

  iotlb #(.N_ENTRIES(TLB_ENTRIES), .PAGE_BITS(PAGE_BITS), .req_t(wide_req_t), .rsp_t(wide_rsp_t))
  i_tlb_wide (
    .clk_i(gclk), .rst_ni(grst_n), .ent_valid_i(cfg_i.tlb_valid), .ent_in_i(cfg_i.tlb_in),
    .ent_out_i(cfg_i.tlb_out), .ent_mask_i(cfg_i.tlb_mask), .ent_r_i(cfg_i.tlb_r),
    .ent_w_i(cfg_i.tlb_w), .slv_req_i(wx_mreq[NP-1]), .slv_rsp_o(wx_mrsp[NP-1]),
    .mst_req_o(wt_req), .mst_rsp_i(wt_rsp), .denied_o(w_denied));

  ro_cache #(.SIZE_B(32768), .LINE_B(64)) i_const_cache (
    .clk_i(gclk), .rst_ni(grst_n), .enable_i(cfg_i.cc_enable), .base_i(cfg_i.cc_base),
    .mask_i(cfg_i.cc_mask), .flush_i(cfg_i.cc_flush),
    .slv_req_i(wt_req), .slv_rsp_o(wt_rsp), .mst_req_o(cc_req), .mst_rsp_i(cc_rsp),
    .hit_o(cc_hit_o), .miss_o(cc_miss_o));

  mem_isolate #(.req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_iso_wout (
    .isolate_i(cfg_i.isolate), .slv_req_i(cc_req), .slv_rsp_o(cc_rsp),
    .mst_req_o(wide_out_req_o), .mst_rsp_i(wide_out_rsp_i), .isolated_o(iso_w_out));

  // ---------------- outgoing narrow port ----------------
  narrow_req_t nt_req;
  narrow_rsp_t nt_rsp;
  iotlb #(.N_ENTRIES(TLB_ENTRIES), .PAGE_BITS(PAGE_BITS), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t))
  i_tlb_narrow (
    .clk_i(gclk), .rst_ni(grst_n), .ent_valid_i(cfg_i.tlb_valid), .ent_in_i(cfg_i.tlb_in),
    .ent_out_i(cfg_i.tlb_out), .ent_mask_i(cfg_i.tlb_mask), .ent_r_i(cfg_i.tlb_r),
    .ent_w_i(cfg_i.tlb_w), .slv_req_i(nx_mreq[NP-1]), .slv_rsp_o(nx_mrsp[NP-1]),
    .mst_req_o(nt_req), .mst_rsp_i(nt_rsp), .denied_o(n_denied));
  mem_isolate #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_iso_nout (
    .isolate_i(cfg_i.isolate), .slv_req_i(nt_req), .slv_rsp_o(nt_rsp),
    .mst_req_o(narrow_out_req_o), .mst_rsp_i(narrow_out_rsp_i), .isolated_o(iso_n_out));

  assign tlb_denied_o = w_denied | n_denied;
  assign isolated_o   = iso_w_in & iso_n_in & iso_w_out & iso_n_out;
endmodule
