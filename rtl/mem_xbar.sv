// Fully connected crossbar for the single-beat request/response protocol
// of occamy_pkg, used for every crossbar of the group and chiplet networks
// and for the small multiplexers inside a cluster.
//
// NM masters, NS slaves. The parent decodes each master's address and
// presents the target slave on sel_i[m] (always a valid slave index), so
// the same crossbar serves any address map, including the chiplet bit and
// HBM interleaving. Each slave has a round-robin arbiter over the masters
// targeting it; the winner's request passes combinationally, with the
// master index appended to the low end of its id. Responses are routed back
// by those low id bits, removed on the way, with a round-robin arbiter per
// master over the slaves answering it. A master keeps its request stable
// until accepted, as in AXI4, so an arbiter's choice does not change while
// a request waits. Requests to different slaves proceed in parallel; this
// gives the full-bandwidth all-to-all connectivity described for the
// group and chiplet crossbars. Burst handling, atomics and AXI4's separate
// read and write channels are not modelled.
module mem_xbar import occamy_pkg::*; #(
  parameter int unsigned NM = 2,
  parameter int unsigned NS = 2,
  parameter type req_t = occamy_pkg::narrow_req_t,
  parameter type rsp_t = occamy_pkg::narrow_rsp_t,
  localparam int unsigned SB = (NS > 1) ? $clog2(NS) : 1,
  localparam int unsigned MB = (NM > 1) ? $clog2(NM) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  req_t          slv_req_i [NM],
  output rsp_t          slv_rsp_o [NM],
  input  logic [SB-1:0] sel_i     [NM],
  output req_t          mst_req_o [NS],
  input  rsp_t          mst_rsp_i [NS]
);
  localparam int unsigned IDB = (NM > 1) ? $clog2(NM) : 0;

  logic [MB-1:0] q_rr_q [NS];
  logic [SB-1:0] p_rr_q [NM];
  logic [MB-1:0] q_win  [NS];
  logic          q_any  [NS];
  logic [SB-1:0] p_win  [NM];
  logic          p_any  [NM];
  logic [MB-1:0] p_dst  [NS];

  // ---------------- request channel ----------------
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      q_any[s] = 1'b0;
      q_win[s] = '0;
      for (int k = 0; k < NM; k++) begin
        int unsigned m;
        m = (int'(q_rr_q[s]) + k) % NM;
        if (!q_any[s] && slv_req_i[m].q_valid && int'(sel_i[m]) == s && m < NM) begin
          q_any[s] = 1'b1;
          q_win[s] = MB'(m);
        end
      end
      mst_req_o[s]         = slv_req_i[q_win[s]];
      mst_req_o[s].q_valid = q_any[s];
      mst_req_o[s].q.id    = (slv_req_i[q_win[s]].q.id << IDB) | ID_W'(q_win[s]);
    end
  end

  // ---------------- response channel ----------------
  for (genvar s = 0; s < NS; s++) begin : g_dst
    assign p_dst[s] = (NM > 1) ? MB'(mst_rsp_i[s].p.id) : '0;
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      p_any[m] = 1'b0;
      p_win[m] = '0;
      for (int k = 0; k < NS; k++) begin
        int unsigned s;
        s = (int'(p_rr_q[m]) + k) % NS;
        if (!p_any[m] && mst_rsp_i[s].p_valid && int'(p_dst[s]) == m && s < NS) begin
          p_any[m] = 1'b1;
          p_win[m] = SB'(s);
        end
      end
      slv_rsp_o[m]         = mst_rsp_i[p_win[m]];
      slv_rsp_o[m].p_valid = p_any[m];
      slv_rsp_o[m].p.id    = mst_rsp_i[p_win[m]].p.id >> IDB;
      // indices outside the port ranges (an id or select that no port
      // owns) select nothing
      slv_rsp_o[m].q_ready = 1'b0;
      for (int s = 0; s < NS; s++)
        if (int'(sel_i[m]) == s && q_any[s] && int'(q_win[s]) == m && mst_rsp_i[s].q_ready)
          slv_rsp_o[m].q_ready = slv_req_i[m].q_valid;
    end
    for (int s = 0; s < NS; s++) begin
      mst_req_o[s].p_ready = 1'b0;
      for (int m = 0; m < NM; m++)
        if (int'(p_dst[s]) == m && p_any[m] && int'(p_win[m]) == s)
          mst_req_o[s].p_ready = slv_req_i[m].p_ready;
    end
  end

  // ---------------- round-robin pointers ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < NS; s++) q_rr_q[s] <= '0;
      for (int m = 0; m < NM; m++) p_rr_q[m] <= '0;
    end else begin
      for (int s = 0; s < NS; s++)
        if (q_any[s] && mst_rsp_i[s].q_ready)
          q_rr_q[s] <= (int'(q_win[s]) == NM - 1) ? '0 : q_win[s] + 1'b1;
      for (int m = 0; m < NM; m++)
        if (p_any[m] && slv_req_i[m].p_ready)
          p_rr_q[m] <= (int'(p_win[m]) == NS - 1) ? '0 : p_win[m] + 1'b1;
    end
  end

  // a master must not drop a request before it is accepted
  for (genvar m = 0; m < NM; m++) begin : g_assert
    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     slv_req_i[m].q_valid && !slv_rsp_o[m].q_ready |=> slv_req_i[m].q_valid)
      else $error("mem_xbar: request withdrawn before acceptance");
  end
endmodule
