// IO translation lookaside buffer on a group's outgoing port.
//
// N_ENTRIES software-written entries map a window of pages (2^PAGE_BITS
// bytes each) to another base and grant read and/or write permission:
//   match:  (page & ~size_mask) == in_page
//   result: (out_page & ~size_mask) | (page & size_mask), offset unchanged
// The first matching entry wins. An access matching an entry without the
// needed permission is not forwarded and is answered with err set; an
// access matching no entry passes untranslated. The error answer waits in a
// one-entry slot and takes priority over downstream answers.
//
// Remapping and page-granular access control follow the paper; entry count,
// page size (4 KiB), priority and the pass-through of unmatched accesses
// are this design's choices.
module iotlb import occamy_pkg::*; #(
  parameter int unsigned N_ENTRIES = 4,
  parameter int unsigned PAGE_BITS = 12,
  parameter type req_t = occamy_pkg::wide_req_t,
  parameter type rsp_t = occamy_pkg::wide_rsp_t
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic [N_ENTRIES-1:0]        ent_valid_i,
  input  logic [N_ENTRIES-1:0][AW-PAGE_BITS-1:0] ent_in_i,
  input  logic [N_ENTRIES-1:0][AW-PAGE_BITS-1:0] ent_out_i,
  input  logic [N_ENTRIES-1:0][AW-PAGE_BITS-1:0] ent_mask_i,
  input  logic [N_ENTRIES-1:0]        ent_r_i,
  input  logic [N_ENTRIES-1:0]        ent_w_i,
  input  req_t slv_req_i,
  output rsp_t slv_rsp_o,
  output req_t mst_req_o,
  input  rsp_t mst_rsp_i,
  output logic denied_o
);
  localparam int unsigned PN = AW - PAGE_BITS;
  logic [PN-1:0] page, new_page;
  logic          match, allow;
  logic          err_valid_q;
  logic [ID_W-1:0] err_id_q;

  always_comb begin
    page     = slv_req_i.q.addr[AW-1:PAGE_BITS];
    new_page = page;
    match    = 1'b0;
    allow    = 1'b1;
    for (int e = N_ENTRIES - 1; e >= 0; e--) begin
      if (ent_valid_i[e] && ((page & ~ent_mask_i[e]) == (ent_in_i[e] & ~ent_mask_i[e]))) begin
        match    = 1'b1;
        new_page = (ent_out_i[e] & ~ent_mask_i[e]) | (page & ent_mask_i[e]);
        allow    = slv_req_i.q.write ? ent_w_i[e] : ent_r_i[e];
      end
    end
  end

  assign denied_o = slv_req_i.q_valid && match && !allow && !err_valid_q;

  always_comb begin
    mst_req_o         = slv_req_i;
    mst_req_o.q_valid = slv_req_i.q_valid && allow;
    mst_req_o.q.addr  = {new_page, slv_req_i.q.addr[PAGE_BITS-1:0]};
    mst_req_o.p_ready = slv_req_i.p_ready && !err_valid_q;
    slv_rsp_o         = mst_rsp_i;
    slv_rsp_o.q_ready = allow ? mst_rsp_i.q_ready : !err_valid_q;
    if (err_valid_q) begin
      slv_rsp_o.p_valid = 1'b1;
      slv_rsp_o.p       = '0;
      slv_rsp_o.p.err   = 1'b1;
      slv_rsp_o.p.id    = err_id_q;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      err_valid_q <= 1'b0;
      err_id_q    <= '0;
    end else if (denied_o) begin
      err_valid_q <= 1'b1;
      err_id_q    <= slv_req_i.q.id;
    end else if (err_valid_q && slv_req_i.p_ready) begin
      err_valid_q <= 1'b0;
    end
  end
endmodule
