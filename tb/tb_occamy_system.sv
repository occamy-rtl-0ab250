// End-to-end testbench of the dual-chiplet system at reduced size
// (2 groups of 1 cluster, small memories, 4 wide PHYs per link).
//
// The two host ports play the host CPUs: they program the chiplet control
// registers and then use the narrow network, the wide network, the system
// DMA engines and the die-to-die links. HBM channels are modelled by small
// behavioural memories; the peripheral port answers with a fixed pattern.
// Every mechanism exercised is counted and one that never happens counts as
// a failure: narrow SPM, cluster TCDM reached from the host, wide SPM through
// the width converter, HBM channel interleaving, narrow and wide die-to-die
// transfers, the system DMA, cluster DMA, IOTLB denial, group isolation and
// the peripheral port.
module tb_occamy_system;
  import occamy_pkg::*;
  localparam int unsigned NG = 2, NC = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  core_req_t   core_req  [N_CHIPLETS][NG][NC][N_CORES];
  core_rsp_t   core_rsp  [N_CHIPLETS][NG][NC][N_CORES];
  logic        dvalid    [N_CHIPLETS][NG][NC];
  dma_cmd_t    dcmd      [N_CHIPLETS][NG][NC];
  logic        dready    [N_CHIPLETS][NG][NC];
  narrow_req_t cn_req    [N_CHIPLETS][NG][NC];
  narrow_rsp_t cn_rsp    [N_CHIPLETS][NG][NC];
  narrow_req_t host_req  [N_CHIPLETS];
  narrow_rsp_t host_rsp  [N_CHIPLETS];
  narrow_req_t per_req   [N_CHIPLETS];
  narrow_rsp_t per_rsp   [N_CHIPLETS];
  logic        sd_valid  [N_CHIPLETS];
  dma_cmd_t    sd_cmd    [N_CHIPLETS];
  logic        sd_ready  [N_CHIPLETS];
  wide_req_t   hbm_req   [N_CHIPLETS][N_HBM_CH];
  wide_rsp_t   hbm_rsp   [N_CHIPLETS][N_HBM_CH];
  logic        hbm_clk_en[N_CHIPLETS];
  logic [NG-1:0] cc_hit [N_CHIPLETS], cc_miss [N_CHIPLETS], tlb_den [N_CHIPLETS], iso [N_CHIPLETS];
  logic [N_CHIPLETS-1:0][3:0] wclk;
  logic [N_CHIPLETS-1:0]      nclk;

  occamy_system #(.N_GRP(NG), .N_CL(NC), .BANK_WORDS(64), .WSPM_B(8192), .NSPM_B(4096),
                  .N_WPHY(4), .PHY_DIV(2)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(core_req), .core_rsp_o(core_rsp),
    .dma_cmd_valid_i(dvalid), .dma_cmd_i(dcmd), .dma_cmd_ready_o(dready),
    .core_narrow_req_i(cn_req), .core_narrow_rsp_o(cn_rsp),
    .host_req_i(host_req), .host_rsp_o(host_rsp),
    .periph_req_o(per_req), .periph_rsp_i(per_rsp),
    .sys_dma_valid_i(sd_valid), .sys_dma_cmd_i(sd_cmd), .sys_dma_ready_o(sd_ready),
    .hbm_req_o(hbm_req), .hbm_rsp_i(hbm_rsp), .hbm_clk_en_o(hbm_clk_en),
    .cc_hit_o(cc_hit), .cc_miss_o(cc_miss), .tlb_denied_o(tlb_den), .grp_isolated_o(iso),
    .d2d_w_clk_o(wclk), .d2d_n_clk_o(nclk));

  localparam logic [47:0] REMOTE = 48'h1 << CHIP_BIT;  // the other chiplet's window
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- HBM channel models (one request at a time) -------------
  logic [511:0] hmem [N_CHIPLETS][N_HBM_CH][logic [47:0]];
  logic         hpv  [N_CHIPLETS][N_HBM_CH];
  logic [511:0] hpd  [N_CHIPLETS][N_HBM_CH];
  logic [ID_W-1:0] hpi [N_CHIPLETS][N_HBM_CH];
  int           hbm_hits [N_HBM_CH];
  for (genvar c = 0; c < N_CHIPLETS; c++) begin : g_hc
    for (genvar h = 0; h < N_HBM_CH; h++) begin : g_hh
      assign hbm_rsp[c][h].q_ready   = !hpv[c][h];
      assign hbm_rsp[c][h].p_valid   = hpv[c][h];
      assign hbm_rsp[c][h].p.rdata   = hpd[c][h];
      assign hbm_rsp[c][h].p.err     = 1'b0;
      assign hbm_rsp[c][h].p.id      = hpi[c][h];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          hpv[c][h] <= 1'b0; hpd[c][h] <= '0; hpi[c][h] <= '0;
        end else begin
          if (hpv[c][h] && hbm_req[c][h].p_ready) hpv[c][h] <= 1'b0;
          if (hbm_req[c][h].q_valid && !hpv[c][h]) begin
            automatic logic [47:0] a = {hbm_req[c][h].q.addr[47:6], 6'b0};
            automatic logic [511:0] old;
            old = hmem[c][h].exists(a) ? hmem[c][h][a] : {8{a[31:0], ~a[31:0]}};
            hpv[c][h] <= 1'b1;
            hpi[c][h] <= hbm_req[c][h].q.id;
            if (hbm_req[c][h].q.write) begin
              for (int b = 0; b < 64; b++)
                if (hbm_req[c][h].q.strb[b]) old[b*8 +: 8] = hbm_req[c][h].q.wdata[b*8 +: 8];
              hmem[c][h][a] = old;
              hpd[c][h] <= '0;
            end else hpd[c][h] <= old;
            if (c == 0) hbm_hits[h]++;
          end
        end
      end
    end
    // peripheral port: answers reads with a pattern of the address
    logic per_v; logic [ID_W-1:0] per_i; logic [63:0] per_d;
    assign per_rsp[c].q_ready = !per_v;
    assign per_rsp[c].p_valid = per_v;
    assign per_rsp[c].p.rdata = per_d;
    assign per_rsp[c].p.err   = 1'b0;
    assign per_rsp[c].p.id    = per_i;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin per_v <= 1'b0; per_i <= '0; per_d <= '0; end
      else begin
        if (per_v && per_req[c].p_ready) per_v <= 1'b0;
        if (per_req[c].q_valid && !per_v) begin
          per_v <= 1'b1; per_i <= per_req[c].q.id; per_d <= {16'hbeef, per_req[c].q.addr};
        end
      end
    end
  end

  // ---------------- host port access ----------------
  task automatic host(input int c, input logic [47:0] a, input bit wr, input logic [63:0] wd,
                      output logic [63:0] rd, output bit err);
    int t = 0;
    @(negedge clk);
    host_req[c].q_valid  = 1'b1;
    host_req[c].q.addr   = a | (c == 1 ? REMOTE : 48'h0);
    host_req[c].q.write  = wr;
    host_req[c].q.wdata  = wd;
    host_req[c].q.strb   = 8'hff;
    host_req[c].q.id     = '0;
    host_req[c].p_ready  = 1'b1;
    do begin @(posedge clk); t++; end while (!host_rsp[c].q_ready && t < 5000);
    @(negedge clk); host_req[c].q_valid = 1'b0;
    while (!host_rsp[c].p_valid && t < 5000) begin @(negedge clk); t++; end
    rd = host_rsp[c].p.rdata; err = host_rsp[c].p.err;
    @(posedge clk); @(negedge clk);
    if (t >= 5000) begin failures++; $display("FAIL host timeout %h", a); end
  endtask

  task automatic wr(input int c, input logic [47:0] a, input logic [63:0] d);
    logic [63:0] r; bit e;
    host(c, a, 1'b1, d, r, e);
    check(!e, $sformatf("write err %h", a));
  endtask
  task automatic rd_chk(input int c, input logic [47:0] a, input logic [63:0] exp, input string what);
    logic [63:0] r; bit e;
    host(c, a, 1'b0, '0, r, e);
    check(!e && r == exp, $sformatf("%s: read %h got %h exp %h", what, a, r, exp));
  endtask

  task automatic sysdma(input int c, input logic [47:0] s, input logic [47:0] d, input int len);
    int t = 0;
    @(negedge clk);
    sd_valid[c] = 1'b1;
    sd_cmd[c] = '{src: s, dst: d, len: len, src_stride: '0, dst_stride: '0, reps: 1};
    do begin @(posedge clk); t++; end while (!sd_ready[c] && t < 1000);
    @(negedge clk); sd_valid[c] = 1'b0;
  endtask

  // mechanism counters
  int n_nspm, n_tcdm, n_wspm, n_hbm_ch, n_d2d_n, n_d2d_w, n_sysdma, n_cldma, n_tlb, n_iso, n_per;
  int tlb_pulses;
  always @(negedge clk) if (rst_n && tlb_den[0][0]) tlb_pulses++;


  initial begin : main
    logic [63:0] r, v; bit e;
    for (int c = 0; c < N_CHIPLETS; c++) begin
      host_req[c] = '0; sd_valid[c] = 1'b0; sd_cmd[c] = '0;
      for (int g = 0; g < NG; g++) for (int k = 0; k < NC; k++) begin
        dvalid[c][g][k] = 1'b0; dcmd[c][g][k] = '0; cn_req[c][g][k] = '0;
        for (int j = 0; j < N_CORES; j++) core_req[c][g][k][j] = '0;
      end
    end
    for (int h = 0; h < N_HBM_CH; h++) hbm_hits[h] = 0;
    {n_nspm, n_tcdm, n_wspm, n_hbm_ch, n_d2d_n, n_d2d_w, n_sysdma, n_cldma, n_tlb, n_iso, n_per} = '0;
    tlb_pulses = 0;
    repeat (4) @(negedge clk); rst_n = 1;
    repeat (4) @(negedge clk);

    // bring up: groups out of reset with clocks on, D2D and HBM clocks on
    for (int c = 0; c < N_CHIPLETS; c++) begin
      for (int g = 0; g < NG; g++) wr(c, SOC_REGS_BASE + 48'(g * 'h100), 64'h3);
      wr(c, SOC_REGS_BASE + 'h800, 64'h1);   // HBM page interleaving on
      wr(c, SOC_REGS_BASE + 'h808, 64'hf);
      wr(c, SOC_REGS_BASE + 'h810, 64'h1);
      wr(c, SOC_REGS_BASE + 'h830, 64'h3);
      rd_chk(c, SOC_REGS_BASE + 'h840, 64'(c), "chip id");
    end

    // narrow SPM
    for (int i = 0; i < 8; i++) begin
      v = {$urandom, $urandom};
      wr(0, NSPM_BASE + 48'(i * 8), v);
      rd_chk(0, NSPM_BASE + 48'(i * 8), v, "nspm"); n_nspm++;
    end
    // cluster TCDM of both groups from the host
    for (int g = 0; g < NG; g++) begin
      v = {$urandom, $urandom};
      wr(0, CLUSTER_BASE + 48'(g) * 48'h4_0000 + 48'h100, v);
      rd_chk(0, CLUSTER_BASE + 48'(g) * 48'h4_0000 + 48'h100, v, "tcdm"); n_tcdm++;
    end
    // wide SPM through the 64->512 bit converter
    for (int i = 0; i < 4; i++) begin
      v = {$urandom, $urandom};
      wr(0, WSPM_BASE + 48'(i * 72), v);
      rd_chk(0, WSPM_BASE + 48'(i * 72), v, "wspm"); n_wspm++;
    end
    // HBM: consecutive pages must spread over the channels
    for (int i = 0; i < 16; i++) begin
      v = {$urandom, $urandom};
      wr(0, HBM_BASE + 48'(i) * 48'h1000, v);
      rd_chk(0, HBM_BASE + 48'(i) * 48'h1000, v, "hbm");
    end
    for (int h = 0; h < N_HBM_CH; h++) if (hbm_hits[h] != 0) n_hbm_ch++;
    check(n_hbm_ch >= 2, "HBM pages spread over channels");
    // narrow die-to-die: chiplet 0 writes chiplet 1's narrow SPM, both read it
    for (int i = 0; i < 4; i++) begin
      v = {$urandom, $urandom};
      wr(0, REMOTE | (NSPM_BASE + 48'h200 + 48'(i * 8)), v);
      rd_chk(1, NSPM_BASE + 48'h200 + 48'(i * 8), v, "d2d narrow local");
      rd_chk(0, REMOTE | (NSPM_BASE + 48'h200 + 48'(i * 8)), v, "d2d narrow remote");
      n_d2d_n++;
    end
    // system DMA: HBM -> wide SPM on chiplet 0, then check a few words
    for (int i = 0; i < 16; i++) wr(0, HBM_BASE + 48'h10_0000 + 48'(i * 8), 64'h1111_0000 + 64'(i));
    sysdma(0, HBM_BASE + 48'h10_0000, WSPM_BASE + 48'h1000, 128);
    repeat (300) @(negedge clk);
    for (int i = 0; i < 16; i++) rd_chk(0, WSPM_BASE + 48'h1000 + 48'(i * 8), 64'h1111_0000 + 64'(i), "sys dma");
    n_sysdma++;
    // wide die-to-die: chiplet 0 DMA copies its wide SPM into chiplet 1's
    sysdma(0, WSPM_BASE + 48'h1000, REMOTE | (WSPM_BASE + 48'h1800), 128);
    repeat (1500) @(negedge clk);
    for (int i = 0; i < 16; i++) rd_chk(1, WSPM_BASE + 48'h1800 + 48'(i * 8), 64'h1111_0000 + 64'(i), "d2d wide");
    n_d2d_w++;
    // cluster DMA: group 0 cluster 0 copies wide SPM into its own TCDM
    @(negedge clk);
    dvalid[0][0][0] = 1'b1;
    dcmd[0][0][0] = '{src: WSPM_BASE + 48'h1000, dst: CLUSTER_BASE + 48'h400, len: 128,
                      src_stride: '0, dst_stride: '0, reps: 1};
    begin int t = 0; do begin @(posedge clk); t++; end while (!dready[0][0][0] && t < 1000); end
    @(negedge clk); dvalid[0][0][0] = 1'b0;
    repeat (400) @(negedge clk);
    for (int i = 0; i < 16; i++) rd_chk(0, CLUSTER_BASE + 48'h400 + 48'(i * 8), 64'h1111_0000 + 64'(i), "cluster dma");
    n_cldma++;
    // IOTLB: an entry without permissions on the narrow SPM page of group 0
    wr(0, SOC_REGS_BASE + 'h20, 64'(NSPM_BASE >> 12));
    wr(0, SOC_REGS_BASE + 'h28, 64'(NSPM_BASE >> 12));
    wr(0, SOC_REGS_BASE + 'h30, 64'h0);
    wr(0, SOC_REGS_BASE + 'h38, 64'h1);
    begin
      int t = 0;
      @(negedge clk);
      cn_req[0][0][0].q_valid = 1'b1;
      cn_req[0][0][0].q.addr  = NSPM_BASE;
      cn_req[0][0][0].q.write = 1'b0;
      cn_req[0][0][0].q.strb  = 8'hff;
      cn_req[0][0][0].p_ready = 1'b1;
      do begin @(posedge clk); t++; end while (!cn_rsp[0][0][0].q_ready && t < 2000);
      @(negedge clk); cn_req[0][0][0].q_valid = 1'b0;
      while (!cn_rsp[0][0][0].p_valid && t < 2000) begin @(negedge clk); t++; end
      e = cn_rsp[0][0][0].p.err;
      check(e, "IOTLB denies the access");
      @(negedge clk); cn_req[0][0][0].p_ready = 1'b0;
      if (e && tlb_pulses > 0) n_tlb++;
    end
    // isolation of group 1
    wr(0, SOC_REGS_BASE + 'h100, 64'h7);
    repeat (20) @(negedge clk);
    check(iso[0][1] == 1'b1, "group 1 isolated");
    rd_chk(0, SOC_REGS_BASE + 'h838, 64'h2, "isolation status");
    if (iso[0][1]) n_iso++;
    // peripheral port
    host(0, PERIPH_BASE + 48'h40, 1'b0, '0, r, e);
    check(!e && r == {16'hbeef, PERIPH_BASE + 48'h40}, "peripheral read");
    if (!e) n_per++;

    $display("mechanisms: nspm %0d tcdm %0d wspm %0d hbm_channels %0d d2d_narrow %0d d2d_wide %0d sys_dma %0d cluster_dma %0d tlb_deny %0d isolation %0d periph %0d",
             n_nspm, n_tcdm, n_wspm, n_hbm_ch, n_d2d_n, n_d2d_w, n_sysdma, n_cldma, n_tlb, n_iso, n_per);
    check(n_nspm > 0 && n_tcdm > 0 && n_wspm > 0 && n_hbm_ch > 1 && n_d2d_n > 0 && n_d2d_w > 0 &&
          n_sysdma > 0 && n_cldma > 0 && n_tlb > 0 && n_iso > 0 && n_per > 0, "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
