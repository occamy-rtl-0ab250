// Cluster scratchpad (TCDM): 128 KiB in 32 banks, shared by the cluster's
// cores and stream units through a logarithmic interconnect, and by the
// DMA engine through a secondary "superbank" interconnect.
//
// Narrow side: NR_MASTERS 64-bit ports. Consecutive double words (8 bytes)
// go to consecutive banks (double-word interleaving): bank = addr[7:3],
// row = addr[16:8]. Each bank has its own round-robin arbiter; a request is
// granted combinationally (gnt) and its read data returns one cycle later
// with rvalid. Conflicting requests simply wait for a later grant.
//
// Wide side: one 512-bit port that reads or writes a 64-byte aligned block,
// which covers eight neighbouring banks (a superbank, addr[7:6]) in the same
// row. The wide port has priority: while it accesses a superbank, no narrow
// master is granted any of its eight banks. Its answer comes the cycle after
// the access straight from the banks, and is held in a register only if not
// taken at once (p_ready low), so the port moves 64 bytes every cycle. Wide requests must be 64-byte aligned; the
// low six address bits are ignored.
//
// The bank count, width, capacity, superbank size and DMA priority follow
// the paper. The round-robin policy and the exact port protocol are this
// design's choices.
module cluster_tcdm import occamy_pkg::*; #(
  parameter int unsigned NR_MASTERS = 34,
  parameter int unsigned NR_BANKS   = 32,
  parameter int unsigned BANK_WORDS = 512,
  parameter int unsigned SB_BANKS   = 8
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t narrow_req_i [NR_MASTERS],
  output tcdm_rsp_t narrow_rsp_o [NR_MASTERS],
  input  wide_req_t wide_req_i,
  output wide_rsp_t wide_rsp_o,
  output logic [NR_MASTERS-1:0] conflict_o   // request present but not granted
);
  localparam int unsigned BB  = $clog2(NR_BANKS);
  localparam int unsigned RB  = $clog2(BANK_WORDS);
  localparam int unsigned MB  = (NR_MASTERS > 1) ? $clog2(NR_MASTERS) : 1;
  localparam int unsigned NSB = NR_BANKS / SB_BANKS;
  localparam int unsigned SBB = (NSB > 1) ? $clog2(NSB) : 1;

  // ---------------- bank signals ----------------
  logic            b_req   [NR_BANKS];
  logic            b_we    [NR_BANKS];
  logic [RB-1:0]   b_addr  [NR_BANKS];
  logic [63:0]     b_wdata [NR_BANKS];
  logic [7:0]      b_be    [NR_BANKS];
  logic [63:0]     b_rdata [NR_BANKS];

  for (genvar b = 0; b < NR_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS), .DW(64)) i_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]),
      .wdata_i(b_wdata[b]), .be_i(b_be[b]), .rdata_o(b_rdata[b]));
  end

  // ---------------- wide (superbank) port ----------------
  logic          w_fire;
  logic [SBB-1:0] w_sb;
  logic          w_pvalid_q, w_pend_q, w_write_q;
  logic [SBB-1:0] w_sb_q;
  logic [ID_W-1:0] w_id_q;
  logic [WIDE_DW-1:0] w_rdata_q, w_rdata_now;

  assign w_sb   = SBB'(wide_req_i.q.addr[6 +: SBB] & (NSB > 1 ? {SBB{1'b1}} : '0));
  // accept a new wide request when the previous answer leaves this cycle
  assign wide_rsp_o.q_ready = !w_pvalid_q && (!w_pend_q || wide_req_i.p_ready);
  assign w_fire = wide_req_i.q_valid && wide_rsp_o.q_ready;

  // ---------------- narrow arbitration ----------------
  logic [BB-1:0] m_bank [NR_MASTERS];
  logic [MB-1:0] rr_q   [NR_BANKS];
  logic [NR_MASTERS-1:0] gnt;
  logic [MB-1:0] win    [NR_BANKS];
  logic          win_v  [NR_BANKS];

  for (genvar m = 0; m < NR_MASTERS; m++) begin : g_mbank
    assign m_bank[m] = narrow_req_i[m].addr[3 +: BB];
  end

  // per-bank request vectors and a rotating-priority pick: the lowest
  // requester at or above the pointer wins, else the lowest overall
  logic [NR_MASTERS-1:0] breq  [NR_BANKS];
  logic [NR_MASTERS-1:0] boh   [NR_BANKS];
  logic                  wblk  [NR_BANKS];

  function automatic logic [NR_MASTERS-1:0] lowest(input logic [NR_MASTERS-1:0] v);
    return v & (~v + 1'b1);
  endfunction

  always_comb begin
    gnt = '0;
    for (int b = 0; b < NR_BANKS; b++) begin
      logic [NR_MASTERS-1:0] hi;
      for (int m = 0; m < NR_MASTERS; m++)
        breq[b][m] = narrow_req_i[m].req && (m_bank[m] == BB'(b));
      hi       = breq[b] & ({NR_MASTERS{1'b1}} << rr_q[b]);
      boh[b]   = (hi != '0) ? lowest(hi) : lowest(breq[b]);
      wblk[b]  = w_fire && (NSB == 1 || (b / SB_BANKS) == int'(w_sb));
      win_v[b] = (breq[b] != '0) && !wblk[b];
      win[b]   = '0;
      for (int m = 0; m < NR_MASTERS; m++)
        if (boh[b][m]) win[b] = MB'(m);
      b_req[b]   = 1'b0;
      b_we[b]    = 1'b0;
      b_addr[b]  = '0;
      b_wdata[b] = '0;
      b_be[b]    = '0;
      if (wblk[b]) begin
        // DMA superbank access wins the bank
        b_req[b]   = 1'b1;
        b_we[b]    = wide_req_i.q.write;
        b_addr[b]  = wide_req_i.q.addr[3 + BB +: RB];
        b_wdata[b] = wide_req_i.q.wdata[(b % SB_BANKS)*64 +: 64];
        b_be[b]    = wide_req_i.q.write ? wide_req_i.q.strb[(b % SB_BANKS)*8 +: 8] : 8'h00;
      end else if (win_v[b]) begin
        // one-hot AND-OR selection of the winning master
        b_req[b] = 1'b1;
        for (int m = 0; m < NR_MASTERS; m++) begin
          if (boh[b][m]) begin
            gnt[m]     = 1'b1;
            b_we[b]    = b_we[b]    | narrow_req_i[m].we;
            b_addr[b]  = b_addr[b]  | narrow_req_i[m].addr[3 + BB +: RB];
            b_wdata[b] = b_wdata[b] | narrow_req_i[m].wdata;
            b_be[b]    = b_be[b]    | narrow_req_i[m].be;
          end
        end
      end
    end
  end

  always_comb begin
    for (int j = 0; j < SB_BANKS; j++)
      w_rdata_now[j*64 +: 64] = w_write_q ? 64'h0 : b_rdata[int'(w_sb_q) * SB_BANKS + j];
  end

  // ---------------- state ----------------
  logic [NR_MASTERS-1:0] rvalid_q;
  logic [BB-1:0] rbank_q [NR_MASTERS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < NR_BANKS; b++) rr_q[b] <= '0;
      rvalid_q   <= '0;
      w_pend_q   <= 1'b0;
      w_pvalid_q <= 1'b0;
      w_write_q  <= 1'b0;
      w_sb_q     <= '0;
      w_id_q     <= '0;
      w_rdata_q  <= '0;
      for (int m = 0; m < NR_MASTERS; m++) rbank_q[m] <= '0;
    end else begin
      for (int b = 0; b < NR_BANKS; b++)
        if (win_v[b])
          rr_q[b] <= (int'(win[b]) == NR_MASTERS - 1) ? '0 : win[b] + 1'b1;
      rvalid_q <= gnt;
      for (int m = 0; m < NR_MASTERS; m++) if (gnt[m]) rbank_q[m] <= m_bank[m];
      // wide response: bank data arrives the cycle after the access
      if (w_pvalid_q && wide_req_i.p_ready) w_pvalid_q <= 1'b0;
      w_pend_q <= w_fire;
      if (w_fire) begin
        w_id_q    <= wide_req_i.q.id;
        w_write_q <= wide_req_i.q.write;
        w_sb_q    <= w_sb;
      end
      // an answer not taken in the cycle the banks deliver it is held here
      if (w_pend_q && !wide_req_i.p_ready) begin
        w_pvalid_q <= 1'b1;
        w_rdata_q  <= w_rdata_now;
      end
    end
  end

  assign wide_rsp_o.p_valid = w_pvalid_q || w_pend_q;
  assign wide_rsp_o.p.rdata = w_pvalid_q ? w_rdata_q : w_rdata_now;
  assign wide_rsp_o.p.err   = 1'b0;
  assign wide_rsp_o.p.id    = w_id_q;

  for (genvar m = 0; m < NR_MASTERS; m++) begin : g_rsp
    assign narrow_rsp_o[m].gnt    = gnt[m];
    assign narrow_rsp_o[m].rvalid = rvalid_q[m];
    assign narrow_rsp_o[m].rdata  = b_rdata[rbank_q[m]];
    assign conflict_o[m] = narrow_req_i[m].req && !gnt[m];
  end
endmodule
