// Bridge from the 64-bit to the 512-bit network.
//
// A narrow access becomes a wide access touching one 8-byte lane:
// the write data is copied into lane addr[5:3] and the strobes are shifted
// there. The lane travels in the low three id bits, so the answer can pick
// its 64 bits from the wide read data without any state; the bridge is
// combinational and passes one access per cycle in each direction.
module dw_upsizer import occamy_pkg::*; (
  input  narrow_req_t slv_req_i,
  output narrow_rsp_t slv_rsp_o,
  output wide_req_t   mst_req_o,
  input  wide_rsp_t   mst_rsp_i
);
  logic [2:0] lane, rlane;
  assign lane  = slv_req_i.q.addr[5:3];
  assign rlane = mst_rsp_i.p.id[2:0];

  always_comb begin
    mst_req_o.q_valid = slv_req_i.q_valid;
    mst_req_o.q.addr  = slv_req_i.q.addr;
    mst_req_o.q.write = slv_req_i.q.write;
    mst_req_o.q.wdata = {8{slv_req_i.q.wdata}};
    mst_req_o.q.strb  = 64'(slv_req_i.q.strb) << (8 * lane);
    mst_req_o.q.id    = {slv_req_i.q.id[ID_W-4:0], lane};
    mst_req_o.p_ready = slv_req_i.p_ready;
    slv_rsp_o.q_ready = mst_rsp_i.q_ready;
    slv_rsp_o.p_valid = mst_rsp_i.p_valid;
    slv_rsp_o.p.rdata = mst_rsp_i.p.rdata[64*rlane +: 64];
    slv_rsp_o.p.err   = mst_rsp_i.p.err;
    slv_rsp_o.p.id    = mst_rsp_i.p.id >> 3;
  end
endmodule
