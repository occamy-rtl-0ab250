// Adapter from a 64-bit network port to a TCDM port of the cluster
// scratchpad. A request is forwarded while no answer is held; the TCDM
// grant accepts it, and the data arriving one cycle later is held as the
// bus response until taken. One access at a time; addresses are reduced to
// the cluster-local offset.
module narrow_to_tcdm import occamy_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  narrow_req_t slv_req_i,
  output narrow_rsp_t slv_rsp_o,
  output tcdm_req_t   tcdm_req_o,
  input  tcdm_rsp_t   tcdm_rsp_i
);
  logic wait_q, pvalid_q;
  logic [63:0] rdata_q;
  logic [ID_W-1:0] id_q;

  always_comb begin
    tcdm_req_o.req   = slv_req_i.q_valid && !wait_q && !pvalid_q;
    tcdm_req_o.we    = slv_req_i.q.write;
    tcdm_req_o.addr  = slv_req_i.q.addr[31:0];
    tcdm_req_o.wdata = slv_req_i.q.wdata;
    tcdm_req_o.be    = slv_req_i.q.strb;
    slv_rsp_o.q_ready = tcdm_req_o.req && tcdm_rsp_i.gnt;
    slv_rsp_o.p_valid = pvalid_q;
    slv_rsp_o.p.rdata = rdata_q;
    slv_rsp_o.p.err   = 1'b0;
    slv_rsp_o.p.id    = id_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wait_q <= 1'b0; pvalid_q <= 1'b0; rdata_q <= '0; id_q <= '0;
    end else begin
      if (slv_rsp_o.q_ready) begin
        wait_q <= 1'b1;
        id_q   <= slv_req_i.q.id;
      end
      if (wait_q && tcdm_rsp_i.rvalid) begin
        wait_q   <= 1'b0;
        pvalid_q <= 1'b1;
        rdata_q  <= tcdm_rsp_i.rdata;
      end
      if (pvalid_q && slv_req_i.p_ready) pvalid_q <= 1'b0;
    end
  end
endmodule
