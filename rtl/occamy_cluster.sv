// Occamy compute cluster: eight worker cores and one DMA control core
// around a shared 128 KiB scratchpad (TCDM).
//
// What is inside:
//  * cluster_tcdm: 32 banks behind a single-cycle logarithmic interconnect;
//    the DMA and the wide slave port use its superbank port with priority.
//  * per worker: su_complex (three stream units bound to ft0..ft2, index
//    comparator) and frep_seq (hardware loop in front of the FPU).
//  * one dma_2d engine, a shared muldiv, the hardware barrier, 16
//    performance counters and an 8 KiB instruction cache (ro_cache) that
//    all nine cores fetch through.
// The integer cores and FPUs are outside this RTL: core_req_i/core_rsp_o
// carry what they exchange with the cluster (core 8 is the DMA core).
//
// TCDM masters: 4*w+0 core w LSU, 4*w+1..3 its SUs, 32 the DMA core LSU,
// 33 the narrow slave port.
//
// Bus ports: narrow_* (64 bit) in: TCDM and cluster registers; the cores'
// own 64-bit accesses leave through core_narrow_* unchanged. wide_* (512
// bit): the slave port reaches the TCDM superbanks; the master port carries
// DMA traffic to other memories and instruction refills.
//
// Cluster window at base_addr_i: TCDM at +0 (128 KiB), registers at
// +0x2_0000 (offsets below):
//   0x0000-0x1fff  stream-unit configuration, worker = off[12:10],
//                  register = off[9:2] (see su_complex)
//   0x2000 src, 0x2008 dst, 0x2010 len, 0x2018 src stride,
//   0x2020 dst stride, 0x2028 reps; write 0x2030 launches the DMA,
//   read 0x2030 = {busy, 31'b0, completed transfers}
//   0x3000 + 8*i   performance counter i: write config, read value
//   0x3100 barrier participant mask, 0x3108 instruction-cache flush
// The register map is this design's own; the composition follows the
// paper's description of the cluster.
module occamy_cluster import occamy_pkg::*; #(
  parameter int unsigned N_WORKERS  = 8,
  parameter int unsigned BANK_WORDS = 512,
  parameter int unsigned ICACHE_B   = 8192
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [AW-1:0] base_addr_i,
  input  core_req_t     core_req_i [N_WORKERS+1],
  output core_rsp_t     core_rsp_o [N_WORKERS+1],
  input  logic          dma_cmd_valid_i,
  input  dma_cmd_t      dma_cmd_i,
  output logic          dma_cmd_ready_o,
  input  narrow_req_t   core_narrow_req_i,
  output narrow_rsp_t   core_narrow_rsp_o,
  output narrow_req_t   narrow_out_req_o,
  input  narrow_rsp_t   narrow_out_rsp_i,
  input  narrow_req_t   narrow_in_req_i,
  output narrow_rsp_t   narrow_in_rsp_o,
  input  wide_req_t     wide_in_req_i,
  output wide_rsp_t     wide_in_rsp_o,
  output wide_req_t     wide_out_req_o,
  input  wide_rsp_t     wide_out_rsp_i
);
  localparam int unsigned NC  = N_WORKERS + 1;
  localparam int unsigned NTM = 4 * N_WORKERS + 2;
  localparam int unsigned TCDM_SPAN = 32 * BANK_WORDS * 8;

  // the cores' global 64-bit accesses leave the cluster directly
  assign narrow_out_req_o  = core_narrow_req_i;
  assign core_narrow_rsp_o = narrow_out_rsp_i;

  // ---------------- TCDM ----------------
  tcdm_req_t tcdm_req [NTM];
  tcdm_rsp_t tcdm_rsp [NTM];
  wide_req_t tcdm_wide_req;
  wide_rsp_t tcdm_wide_rsp;
  logic [NTM-1:0] conflict;

  cluster_tcdm #(.NR_MASTERS(NTM), .NR_BANKS(32), .BANK_WORDS(BANK_WORDS), .SB_BANKS(8)) i_tcdm (
    .clk_i, .rst_ni, .narrow_req_i(tcdm_req), .narrow_rsp_o(tcdm_rsp),
    .wide_req_i(tcdm_wide_req), .wide_rsp_o(tcdm_wide_rsp), .conflict_o(conflict));

  // ---------------- narrow slave: TCDM or registers ----------------
  narrow_req_t nin_req [1];
  narrow_rsp_t nin_rsp [1];
  logic [0:0]  nin_sel [1];
  narrow_req_t nsl_req [2];
  narrow_rsp_t nsl_rsp [2];

  assign nin_req[0]      = narrow_in_req_i;
  assign narrow_in_rsp_o = nin_rsp[0];
  assign nin_sel[0]      = narrow_in_req_i.q.addr[17];

  mem_xbar #(.NM(1), .NS(2), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_nin_demux (
    .clk_i, .rst_ni, .slv_req_i(nin_req), .slv_rsp_o(nin_rsp), .sel_i(nin_sel),
    .mst_req_o(nsl_req), .mst_rsp_i(nsl_rsp));

  narrow_to_tcdm i_nin_tcdm (
    .clk_i, .rst_ni, .slv_req_i(nsl_req[0]), .slv_rsp_o(nsl_rsp[0]),
    .tcdm_req_o(tcdm_req[NTM-1]), .tcdm_rsp_i(tcdm_rsp[NTM-1]));

  // ---------------- register block ----------------
  narrow_req_t reg_req;
  logic        reg_fire, reg_wr, reg_pvalid_q;
  logic [15:0] reg_ofs;
  logic [63:0] reg_rdata, reg_rdata_q, reg_wdata;
  logic [ID_W-1:0] reg_id_q;
  logic [NC-1:0] bar_mask_q;
  logic        icache_flush;
  dma_cmd_t    dma_reg_q;
  logic        dma_reg_launch;
  logic        perf_we;
  logic [31:0] perf_cnt [16];
  logic [31:0] dma_done;
  logic        dma_busy;
  logic [31:0] su_rdata [N_WORKERS];
  logic [N_WORKERS-1:0] core_scfg_we;

  assign reg_req   = nsl_req[1];
  assign reg_ofs   = reg_req.q.addr[15:0];
  assign reg_wdata = reg_req.q.wdata;
  for (genvar w = 0; w < N_WORKERS; w++) begin : g_scfg_we
    assign core_scfg_we[w] = core_req_i[w].scfg_we;
  end
  // a register access waits while the core of the addressed worker writes
  // its own stream configuration
  logic reg_blocked;
  assign reg_blocked = (reg_ofs < 16'h2000) && core_scfg_we[reg_ofs[12:10] % N_WORKERS];
  assign reg_fire = reg_req.q_valid && (!reg_pvalid_q || reg_req.p_ready) && !reg_blocked;
  assign reg_wr   = reg_fire && reg_req.q.write;
  assign dma_reg_launch = reg_wr && reg_ofs == 16'h2030;
  assign icache_flush   = reg_wr && reg_ofs == 16'h3108;
  assign perf_we        = reg_wr && reg_ofs[15:8] == 8'h30;

  always_comb begin
    reg_rdata = '0;
    if (reg_ofs < 16'h2000) reg_rdata = {2{su_rdata[reg_ofs[12:10] % N_WORKERS]}};
    else if (reg_ofs == 16'h2030) reg_rdata = {dma_busy, 31'd0, dma_done};
    else if (reg_ofs[15:8] == 8'h30) reg_rdata = 64'(perf_cnt[reg_ofs[6:3]]);
    else if (reg_ofs == 16'h3100) reg_rdata = 64'(bar_mask_q);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      reg_pvalid_q <= 1'b0; reg_rdata_q <= '0; reg_id_q <= '0;
      bar_mask_q <= '1; dma_reg_q <= '0;
    end else begin
      if (reg_fire) begin
        reg_pvalid_q <= 1'b1;
        reg_rdata_q  <= reg_rdata;
        reg_id_q     <= reg_req.q.id;
      end else if (reg_req.p_ready) begin
        reg_pvalid_q <= 1'b0;
      end
      if (reg_wr) begin
        unique case (reg_ofs)
          16'h2000: dma_reg_q.src        <= reg_wdata[AW-1:0];
          16'h2008: dma_reg_q.dst        <= reg_wdata[AW-1:0];
          16'h2010: dma_reg_q.len        <= reg_wdata[31:0];
          16'h2018: dma_reg_q.src_stride <= reg_wdata[AW-1:0];
          16'h2020: dma_reg_q.dst_stride <= reg_wdata[AW-1:0];
          16'h2028: dma_reg_q.reps       <= reg_wdata[31:0];
          16'h3100: bar_mask_q           <= reg_wdata[NC-1:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    nsl_rsp[1]           = '0;
    nsl_rsp[1].q_ready   = reg_fire;
    nsl_rsp[1].p_valid   = reg_pvalid_q;
    nsl_rsp[1].p.rdata   = reg_rdata_q;
    nsl_rsp[1].p.id      = reg_id_q;
  end

  // ---------------- worker FPU subsystems ----------------
  logic [N_WORKERS-1:0] fpu_issue;
  logic [N_WORKERS-1:0] su_busy_any;

  for (genvar w = 0; w < N_WORKERS; w++) begin : g_worker
    logic        cfg_we;
    logic [7:0]  cfg_addr;
    logic [31:0] cfg_wdata;
    logic [2:0]  su_busy;
    tcdm_req_t   su_req [3];
    tcdm_rsp_t   su_rsp [3];
    logic        reg_sel;

    assign reg_sel   = reg_ofs < 16'h2000 && int'(reg_ofs[12:10]) == w;
    assign cfg_we    = core_req_i[w].scfg_we || (reg_wr && reg_sel);
    assign cfg_addr  = core_req_i[w].scfg_we ? core_req_i[w].scfg_addr : reg_ofs[9:2];
    assign cfg_wdata = core_req_i[w].scfg_we ? core_req_i[w].scfg_wdata :
                       (reg_ofs[2] ? reg_wdata[63:32] : reg_wdata[31:0]);

    su_complex i_sus (
      .clk_i, .rst_ni,
      .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
      .cfg_rdata_o(su_rdata[w]),
      .ft_rvalid_o(core_rsp_o[w].ft_rvalid), .ft_rdata_o(core_rsp_o[w].ft_rdata),
      .ft_rready_i(core_req_i[w].ft_rready),
      .ft_wvalid_i(core_req_i[w].ft_wvalid), .ft_wdata_i(core_req_i[w].ft_wdata),
      .ft_wready_o(core_rsp_o[w].ft_wready),
      .tcdm_req_o(su_req), .tcdm_rsp_i(su_rsp), .busy_o(su_busy));
    assign core_rsp_o[w].scfg_rdata = su_rdata[w];
    assign su_busy_any[w] = |su_busy;

    assign tcdm_req[4*w]   = core_req_i[w].lsu;
    assign core_rsp_o[w].lsu = tcdm_rsp[4*w];
    for (genvar s = 0; s < 3; s++) begin : g_su_port
      assign tcdm_req[4*w+1+s] = su_req[s];
      assign su_rsp[s]         = tcdm_rsp[4*w+1+s];
    end

    logic frep_looping;
    frep_seq #(.DEPTH(16), .IW(32)) i_frep (
      .clk_i, .rst_ni,
      .in_valid_i(core_req_i[w].off_valid), .in_instr_i(core_req_i[w].off_instr),
      .in_is_frep_i(core_req_i[w].off_is_frep), .in_reps_i(core_req_i[w].off_reps),
      .in_n_i(core_req_i[w].off_n), .in_ready_o(core_rsp_o[w].off_ready),
      .out_valid_o(core_rsp_o[w].fpu_valid), .out_instr_o(core_rsp_o[w].fpu_instr),
      .out_ready_i(core_req_i[w].fpu_ready), .looping_o(frep_looping));
    assign fpu_issue[w] = core_rsp_o[w].fpu_valid && core_req_i[w].fpu_ready;
  end

  // the DMA core has no FPU subsystem
  always_comb begin
    core_rsp_o[NC-1].scfg_rdata = '0;
    core_rsp_o[NC-1].ft_rvalid  = '0;
    core_rsp_o[NC-1].ft_rdata   = '0;
    core_rsp_o[NC-1].ft_wready  = '0;
    core_rsp_o[NC-1].off_ready  = 1'b0;
    core_rsp_o[NC-1].fpu_valid  = 1'b0;
    core_rsp_o[NC-1].fpu_instr  = '0;
  end
  assign tcdm_req[NTM-2]       = core_req_i[NC-1].lsu;
  assign core_rsp_o[NC-1].lsu  = tcdm_rsp[NTM-2];

  // ---------------- shared muldiv ----------------
  logic [NC-1:0] md_valid, md_ready, md_rvalid;
  md_op_e        md_op [NC];
  logic [31:0]   md_a [NC], md_b [NC];
  logic [31:0]   md_data;
  for (genvar c = 0; c < NC; c++) begin : g_md
    assign md_valid[c] = core_req_i[c].md_valid;
    assign md_op[c]    = core_req_i[c].md_op;
    assign md_a[c]     = core_req_i[c].md_a;
    assign md_b[c]     = core_req_i[c].md_b;
    assign core_rsp_o[c].md_ready     = md_ready[c];
    assign core_rsp_o[c].md_rsp_valid = md_rvalid[c];
    assign core_rsp_o[c].md_rsp_data  = md_data;
  end
  muldiv #(.N_CORES(NC)) i_muldiv (
    .clk_i, .rst_ni, .req_valid_i(md_valid), .req_op_i(md_op), .req_a_i(md_a), .req_b_i(md_b),
    .req_ready_o(md_ready), .rsp_valid_o(md_rvalid), .rsp_data_o(md_data));

  // ---------------- barrier ----------------
  logic [NC-1:0] bar_arrive, bar_release;
  logic [31:0]   bar_rounds;
  for (genvar c = 0; c < NC; c++) begin : g_bar
    assign bar_arrive[c] = core_req_i[c].barrier_arrive;
    assign core_rsp_o[c].barrier_release = bar_release[c];
  end
  cluster_barrier #(.N_CORES(NC)) i_barrier (
    .clk_i, .rst_ni, .mask_i(bar_mask_q), .arrive_i(bar_arrive), .release_o(bar_release),
    .rounds_o(bar_rounds));

  // ---------------- instruction cache ----------------
  narrow_req_t fetch_req [NC];
  narrow_rsp_t fetch_rsp [NC];
  logic [0:0]  fetch_sel [NC];
  narrow_req_t ic_nreq [1];
  narrow_rsp_t ic_nrsp [1];
  wide_req_t   ic_wreq, ic_mreq;
  wide_rsp_t   ic_wrsp, ic_mrsp;
  logic        ic_hit, ic_miss;
  for (genvar c = 0; c < NC; c++) begin : g_fetch
    assign fetch_req[c] = core_req_i[c].fetch;
    assign core_rsp_o[c].fetch = fetch_rsp[c];
    assign fetch_sel[c] = 1'b0;
  end
  mem_xbar #(.NM(NC), .NS(1), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_fetch_mux (
    .clk_i, .rst_ni, .slv_req_i(fetch_req), .slv_rsp_o(fetch_rsp), .sel_i(fetch_sel),
    .mst_req_o(ic_nreq), .mst_rsp_i(ic_nrsp));
  dw_upsizer i_fetch_up (
    .slv_req_i(ic_nreq[0]), .slv_rsp_o(ic_nrsp[0]), .mst_req_o(ic_wreq), .mst_rsp_i(ic_wrsp));
  ro_cache #(.SIZE_B(ICACHE_B), .LINE_B(64)) i_icache (
    .clk_i, .rst_ni, .enable_i(1'b1), .base_i('0), .mask_i('0), .flush_i(icache_flush),
    .slv_req_i(ic_wreq), .slv_rsp_o(ic_wrsp), .mst_req_o(ic_mreq), .mst_rsp_i(ic_mrsp),
    .hit_o(ic_hit), .miss_o(ic_miss));

  // ---------------- DMA ----------------
  wide_req_t dma_rd_req, dma_wr_req;
  wide_rsp_t dma_rd_rsp, dma_wr_rsp;
  logic      dma_beat, dma_valid, dma_ready;
  dma_cmd_t  dma_cmd;
  assign dma_valid = dma_cmd_valid_i || dma_reg_launch;
  assign dma_cmd   = dma_cmd_valid_i ? dma_cmd_i : dma_reg_q;
  assign dma_cmd_ready_o = dma_ready;
  dma_2d #(.BUF_DEPTH(8)) i_dma (
    .clk_i, .rst_ni, .cmd_valid_i(dma_valid), .cmd_i(dma_cmd), .cmd_ready_o(dma_ready),
    .busy_o(dma_busy), .done_count_o(dma_done), .rd_req_o(dma_rd_req), .rd_rsp_i(dma_rd_rsp),
    .wr_req_o(dma_wr_req), .wr_rsp_i(dma_wr_rsp), .beat_o(dma_beat));

  // ---------------- wide crossbar: TCDM superbanks or outside ----------------
  wide_req_t wx_req [4];
  wide_rsp_t wx_rsp [4];
  logic [0:0] wx_sel [4];
  wide_req_t wx_mreq [2];
  wide_rsp_t wx_mrsp [2];

  function automatic logic is_local(logic [AW-1:0] a, logic [AW-1:0] base);
    return (a >= base) && (a < base + AW'(TCDM_SPAN));
  endfunction

  assign wx_req[0] = dma_rd_req;
  assign wx_req[1] = dma_wr_req;
  assign wx_req[2] = wide_in_req_i;
  assign wx_req[3] = ic_mreq;
  assign dma_rd_rsp    = wx_rsp[0];
  assign dma_wr_rsp    = wx_rsp[1];
  assign wide_in_rsp_o = wx_rsp[2];
  assign ic_mrsp       = wx_rsp[3];
  assign wx_sel[0] = !is_local(dma_rd_req.q.addr, base_addr_i);
  assign wx_sel[1] = !is_local(dma_wr_req.q.addr, base_addr_i);
  assign wx_sel[2] = 1'b0;
  assign wx_sel[3] = 1'b1;

  mem_xbar #(.NM(4), .NS(2), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_wide_xbar (
    .clk_i, .rst_ni, .slv_req_i(wx_req), .slv_rsp_o(wx_rsp), .sel_i(wx_sel),
    .mst_req_o(wx_mreq), .mst_rsp_i(wx_mrsp));
  assign tcdm_wide_req  = wx_mreq[0];
  assign wx_mrsp[0]     = tcdm_wide_rsp;
  assign wide_out_req_o = wx_mreq[1];
  assign wx_mrsp[1]     = wide_out_rsp_i;

  // ---------------- performance counters ----------------
  logic [31:0] evt;
  always_comb begin
    evt = '0;
    evt[N_WORKERS-1:0]          = fpu_issue;
    evt[8 +: N_WORKERS]         = su_busy_any;
    evt[16]                     = dma_busy;
    evt[17]                     = dma_beat;
    evt[18]                     = ic_hit;
    evt[19]                     = ic_miss;
    evt[20]                     = |conflict;
    evt[21]                     = |bar_release;
  end
  perf_counters #(.N_CNT(16), .N_EVT(32)) i_perf (
    .clk_i, .rst_ni, .evt_i(evt), .cfg_we_i(perf_we), .cfg_addr_i(reg_ofs[6:3]),
    .cfg_wdata_i(reg_wdata[31:0]), .cnt_o(perf_cnt));
endmodule
