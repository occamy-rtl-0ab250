// Chiplet control and status registers, reached by the host over the narrow
// interconnect.
//
// 64-bit registers, byte offsets inside the register block:
//   0x000 + g*0x100  group g control {cc_flush[3], isolate[2], rst_n[1], clk_en[0]}
//                    (cc_flush is a pulse: it reads back 0)
//   +0x08            constant-cache enable   +0x10 cache base   +0x18 cache mask
//   +0x20 + e*0x20   IOTLB entry e: +0 input page, +8 output page, +0x10 page
//                    mask, +0x18 {w[2], r[1], valid[0]}  (pages are addr>>12)
//   0x800  HBM page interleaving enable
//   0x808  wide D2D PHY enable mask      0x810 narrow D2D PHY enable mask
//   0x818  D2D raw mode {narrow[1], wide[0]}
//   0x820  wide D2D PHY fault flags (RO) 0x828 narrow PHY fault flags (RO)
//   0x830  clock enables {hbm[1], d2d[0]}
//   0x838  group isolation status (RO)   0x840 chiplet id (RO)
// Unmapped offsets read 0 and ignore writes. One request per cycle, the
// response one cycle later. After reset all groups run, are not isolated,
// have the caches and TLBs off, interleaving is off and all PHYs are enabled.
// The paper names these controls (clock gating, reset and isolation per
// group, TLBs, cache configuration, interleaving, PHY selection); the map and
// reset values are this design's choice.
module soc_regs import occamy_pkg::*; #(
  parameter int unsigned N_GRP    = 6,
  parameter int unsigned N_WPHY   = 38,
  parameter int unsigned N_NPHY   = 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                chip_id_i,
  input  narrow_req_t         slv_req_i,
  output narrow_rsp_t         slv_rsp_o,
  output group_cfg_t          grp_cfg_o [N_GRP],
  input  logic [N_GRP-1:0]    grp_isolated_i,
  output logic                hbm_interleave_o,
  output logic [N_WPHY-1:0]   wide_phy_en_o,
  output logic [N_NPHY-1:0]   narrow_phy_en_o,
  output logic [1:0]          d2d_raw_o,
  input  logic [N_WPHY-1:0]   wide_phy_err_i,
  input  logic [N_NPHY-1:0]   narrow_phy_err_i,
  output logic                d2d_clk_en_o,
  output logic                hbm_clk_en_o
);
  logic        fire, pvalid_q;
  logic [63:0] rdata_q, rdata, wmask;
  logic [ID_W-1:0] id_q;
  logic [11:0] off;
  group_cfg_t  cfg_q [N_GRP];

  assign off  = {slv_req_i.q.addr[11:3], 3'b000};
  assign fire = slv_req_i.q_valid && slv_rsp_o.q_ready;
  for (genvar b = 0; b < 8; b++) begin : g_m
    assign wmask[8*b +: 8] = {8{slv_req_i.q.strb[b]}};
  end

  function automatic logic [63:0] merge(logic [63:0] old, logic [63:0] nw, logic [63:0] m);
    return (old & ~m) | (nw & m);
  endfunction

  // read mux
  always_comb begin
    int unsigned g, e, r;
    rdata = '0;
    g = 32'(off[10:8]);
    r = 32'(off[7:0]);
    e = (r - 32) / 32;
    if (off[11] == 1'b0) begin
      if (g < N_GRP) begin
        if (r == 0)       rdata = {61'b0, cfg_q[g].isolate, cfg_q[g].rst_n, cfg_q[g].clk_en};
        else if (r == 8)  rdata = 64'(cfg_q[g].cc_enable);
        else if (r == 16) rdata = 64'(cfg_q[g].cc_base);
        else if (r == 24) rdata = 64'(cfg_q[g].cc_mask);
        else if (e < TLB_ENTRIES) begin
          case (r % 32)
            0:  rdata = 64'(cfg_q[g].tlb_in[e]);
            8:  rdata = 64'(cfg_q[g].tlb_out[e]);
            16: rdata = 64'(cfg_q[g].tlb_mask[e]);
            default: rdata = {61'b0, cfg_q[g].tlb_w[e], cfg_q[g].tlb_r[e], cfg_q[g].tlb_valid[e]};
          endcase
        end
      end
    end else begin
      case (off[7:0])
        8'h00: rdata = 64'(hbm_interleave_o);
        8'h08: rdata = 64'(wide_phy_en_o);
        8'h10: rdata = 64'(narrow_phy_en_o);
        8'h18: rdata = 64'(d2d_raw_o);
        8'h20: rdata = 64'(wide_phy_err_i);
        8'h28: rdata = 64'(narrow_phy_err_i);
        8'h30: rdata = {62'b0, hbm_clk_en_o, d2d_clk_en_o};
        8'h38: rdata = 64'(grp_isolated_i);
        8'h40: rdata = 64'(chip_id_i);
        default: rdata = '0;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pvalid_q         <= 1'b0;
      rdata_q          <= '0;
      id_q             <= '0;
      hbm_interleave_o <= 1'b0;
      wide_phy_en_o    <= '1;
      narrow_phy_en_o  <= '1;
      d2d_raw_o        <= '0;
      d2d_clk_en_o     <= 1'b1;
      hbm_clk_en_o     <= 1'b1;
      for (int g = 0; g < N_GRP; g++) begin
        cfg_q[g]        <= '0;
        cfg_q[g].clk_en <= 1'b1;
        cfg_q[g].rst_n  <= 1'b1;
      end
    end else begin
      for (int g = 0; g < N_GRP; g++) cfg_q[g].cc_flush <= 1'b0;
      if (fire) begin
        pvalid_q <= 1'b1;
        id_q     <= slv_req_i.q.id;
        rdata_q  <= rdata;
      end else if (slv_req_i.p_ready) begin
        pvalid_q <= 1'b0;
      end
      if (fire && slv_req_i.q.write) begin
        logic [63:0] nw;
        int unsigned g, e, r;
        g  = 32'(off[10:8]);
        r  = 32'(off[7:0]);
        e  = (r - 32) / 32;
        nw = merge(rdata, slv_req_i.q.wdata, wmask);
        if (off[11] == 1'b0) begin
          if (g < N_GRP) begin
            if (r == 0) begin
              cfg_q[g].clk_en   <= nw[0];
              cfg_q[g].rst_n    <= nw[1];
              cfg_q[g].isolate  <= nw[2];
              cfg_q[g].cc_flush <= nw[3];
            end
            else if (r == 8)  cfg_q[g].cc_enable <= nw[0];
            else if (r == 16) cfg_q[g].cc_base   <= nw[AW-1:0];
            else if (r == 24) cfg_q[g].cc_mask   <= nw[AW-1:0];
            else if (e < TLB_ENTRIES) begin
              case (r % 32)
                0:  cfg_q[g].tlb_in[e]   <= nw[AW-PAGE_BITS-1:0];
                8:  cfg_q[g].tlb_out[e]  <= nw[AW-PAGE_BITS-1:0];
                16: cfg_q[g].tlb_mask[e] <= nw[AW-PAGE_BITS-1:0];
                default: begin
                  cfg_q[g].tlb_valid[e] <= nw[0];
                  cfg_q[g].tlb_r[e]     <= nw[1];
                  cfg_q[g].tlb_w[e]     <= nw[2];
                end
              endcase
            end
          end
        end else begin
          case (off[7:0])
            8'h00: hbm_interleave_o <= nw[0];
            8'h08: wide_phy_en_o    <= nw[N_WPHY-1:0];
            8'h10: narrow_phy_en_o  <= nw[N_NPHY-1:0];
            8'h18: d2d_raw_o        <= nw[1:0];
            8'h30: {hbm_clk_en_o, d2d_clk_en_o} <= nw[1:0];
            default: ;
          endcase
        end
      end
    end
  end

  assign grp_cfg_o = cfg_q;

  always_comb begin
    slv_rsp_o         = '0;
    slv_rsp_o.q_ready = !pvalid_q || slv_req_i.p_ready;
    slv_rsp_o.p_valid = pvalid_q;
    slv_rsp_o.p.rdata = rdata_q;
    slv_rsp_o.p.id    = id_q;
  end
endmodule
