// Bridge from the 512-bit to the 64-bit network.
//
// A wide access is split into 64-bit accesses, one per 8-byte lane: all
// eight lanes for a read, only lanes with any strobe set for a write. The
// bridge handles one wide access at a time: it issues the lane accesses in
// order, collects their answers (any err is kept), and answers the wide
// access once all have returned. A write without strobes is answered
// without any narrow access.
module dw_downsizer import occamy_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  wide_req_t   slv_req_i,
  output wide_rsp_t   slv_rsp_o,
  output narrow_req_t mst_req_o,
  input  narrow_rsp_t mst_rsp_i
);
  typedef enum logic [1:0] { S_IDLE, S_ISSUE, S_RESP } state_e;
  state_e state_q;
  wide_q_t q_q;
  logic [7:0] todo_q, wait_q;     // lanes still to issue / to be answered
  logic [2:0] lane, rlane;
  logic [WIDE_DW-1:0] rdata_q;
  logic err_q;

  // lowest lane still to issue
  always_comb begin
    lane = '0;
    for (int l = 7; l >= 0; l--) if (todo_q[l]) lane = 3'(l);
  end
  assign rlane = mst_rsp_i.p.id[2:0];

  always_comb begin
    mst_req_o         = '0;
    mst_req_o.q_valid = (state_q == S_ISSUE) && (todo_q != '0);
    mst_req_o.q.addr  = {q_q.addr[AW-1:6], lane, 3'b000};
    mst_req_o.q.write = q_q.write;
    mst_req_o.q.wdata = q_q.wdata[64*lane +: 64];
    mst_req_o.q.strb  = q_q.write ? q_q.strb[8*lane +: 8] : 8'hff;
    mst_req_o.q.id    = ID_W'(lane);
    mst_req_o.p_ready = 1'b1;
    slv_rsp_o         = '0;
    slv_rsp_o.q_ready = (state_q == S_IDLE);
    slv_rsp_o.p_valid = (state_q == S_RESP);
    slv_rsp_o.p.rdata = rdata_q;
    slv_rsp_o.p.err   = err_q;
    slv_rsp_o.p.id    = q_q.id;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; q_q <= '0; todo_q <= '0; wait_q <= '0; rdata_q <= '0; err_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (slv_req_i.q_valid) begin
          logic [7:0] lanes;
          for (int l = 0; l < 8; l++)
            lanes[l] = !slv_req_i.q.write || (slv_req_i.q.strb[8*l +: 8] != '0);
          q_q     <= slv_req_i.q;
          todo_q  <= lanes;
          wait_q  <= lanes;
          rdata_q <= '0;
          err_q   <= 1'b0;
          state_q <= (lanes == '0) ? S_RESP : S_ISSUE;
        end
        S_ISSUE: begin
          if (mst_req_o.q_valid && mst_rsp_i.q_ready) todo_q[lane] <= 1'b0;
          if (mst_rsp_i.p_valid) begin
            wait_q[rlane] <= 1'b0;
            rdata_q[64*rlane +: 64] <= mst_rsp_i.p.rdata;
            err_q <= err_q | mst_rsp_i.p.err;
            if ((wait_q & ~(8'b1 << rlane)) == '0) state_q <= S_RESP;
          end
        end
        default: if (slv_req_i.p_ready) state_q <= S_IDLE;
      endcase
    end
  end
endmodule
