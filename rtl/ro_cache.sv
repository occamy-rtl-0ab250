// Read-only cache on a 512-bit port: the cluster's shared L1 instruction
// cache (8 KiB) and each group's remappable constant cache (32 KiB).
//
// The cache sits between an upstream (slv) and a downstream (mst) port.
// Reads whose address falls in the cacheable window ((addr & mask) == base,
// set at run time, hence "remappable") are looked up in a direct-mapped
// array of 64-byte lines; one line is exactly one bus beat. A hit answers
// the cycle after the request. A miss stalls that request, refills the
// line with one downstream read tagged by the top id bit, then answers as a
// hit. Writes and all other accesses bypass the cache unchanged, so the
// cache is transparent for everything it does not hold. flush_i
// invalidates all lines, e.g. after code or constants change in memory.
// Hit answers take priority over passing downstream answers upstream.
// hit_o and miss_o pulse per lookup, for performance counting.
//
// Sizes follow the paper; organisation (direct mapped, one line per beat,
// blocking refill) is this design's choice, and the arrays are read
// combinationally where silicon would use SRAM macros.
module ro_cache import occamy_pkg::*; #(
  parameter int unsigned SIZE_B = 32768,
  parameter int unsigned LINE_B = 64
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          enable_i,
  input  logic [AW-1:0] base_i,
  input  logic [AW-1:0] mask_i,
  input  logic          flush_i,
  input  wide_req_t     slv_req_i,
  output wide_rsp_t     slv_rsp_o,
  output wide_req_t     mst_req_o,
  input  wide_rsp_t     mst_rsp_i,
  output logic          hit_o,
  output logic          miss_o
);
  localparam int unsigned LINES = SIZE_B / LINE_B;
  localparam int unsigned OB = $clog2(LINE_B);
  localparam int unsigned IB = $clog2(LINES);
  localparam int unsigned TB = AW - OB - IB;

  logic [WIDE_DW-1:0] data_q [LINES];
  logic [TB-1:0]      tag_q  [LINES];
  logic [LINES-1:0]   valid_q;

  logic          cacheable, hit, refill_pend_q, refill_issue;
  logic [IB-1:0] idx;
  logic [TB-1:0] tag;
  logic          hb_valid_q;
  logic [WIDE_DW-1:0] hb_data_q;
  logic [ID_W-1:0]    hb_id_q;
  logic          is_refill_rsp;

  assign idx = slv_req_i.q.addr[OB +: IB];
  assign tag = slv_req_i.q.addr[OB + IB +: TB];
  assign cacheable = enable_i && !slv_req_i.q.write &&
                     ((slv_req_i.q.addr & mask_i) == base_i);
  assign hit = valid_q[idx] && (tag_q[idx] == tag);
  assign is_refill_rsp = mst_rsp_i.p.id[ID_W-1];
  assign refill_issue  = slv_req_i.q_valid && cacheable && !hit && !refill_pend_q;

  always_comb begin
    // downstream request: refill or bypass
    mst_req_o = slv_req_i;
    if (refill_issue) begin
      mst_req_o.q_valid = 1'b1;
      mst_req_o.q.addr  = {slv_req_i.q.addr[AW-1:OB], {OB{1'b0}}};
      mst_req_o.q.id    = {1'b1, {(ID_W-1){1'b0}}};
    end else begin
      mst_req_o.q_valid = slv_req_i.q_valid && !cacheable;
    end
    // downstream answers: refills are absorbed, others go upstream unless
    // the hit buffer is being emptied
    mst_req_o.p_ready = is_refill_rsp ? 1'b1 : (!hb_valid_q && slv_req_i.p_ready);

    slv_rsp_o = mst_rsp_i;
    slv_rsp_o.q_ready = cacheable ? (hit && !hb_valid_q) : mst_rsp_i.q_ready && !refill_issue;
    if (hb_valid_q) begin
      slv_rsp_o.p_valid = 1'b1;
      slv_rsp_o.p.rdata = hb_data_q;
      slv_rsp_o.p.id    = hb_id_q;
      slv_rsp_o.p.err   = 1'b0;
    end else begin
      slv_rsp_o.p_valid = mst_rsp_i.p_valid && !is_refill_rsp;
    end
  end

  assign hit_o  = slv_req_i.q_valid && cacheable && hit && !hb_valid_q;
  assign miss_o = refill_issue && mst_rsp_i.q_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q       <= '0;
      refill_pend_q <= 1'b0;
      hb_valid_q    <= 1'b0;
      hb_id_q       <= '0;
      hb_data_q     <= '0;
    end else begin
      if (flush_i) valid_q <= '0;
      if (refill_issue && mst_rsp_i.q_ready) refill_pend_q <= 1'b1;
      if (mst_rsp_i.p_valid && is_refill_rsp) begin
        refill_pend_q <= 1'b0;
        if (!flush_i) valid_q[idx] <= 1'b1;
      end
      if (hit_o) begin
        hb_valid_q <= 1'b1;
        hb_data_q  <= data_q[idx];
        hb_id_q    <= slv_req_i.q.id;
      end else if (hb_valid_q && slv_req_i.p_ready) begin
        hb_valid_q <= 1'b0;
      end
    end
  end

  // the refilled line belongs to the request still waiting upstream
  always_ff @(posedge clk_i) begin
    if (mst_rsp_i.p_valid && is_refill_rsp) begin
      data_q[idx] <= mst_rsp_i.p.rdata;
      tag_q[idx]  <= tag;
    end
  end
endmodule
