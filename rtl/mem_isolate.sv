// Isolation of one bus port, used between a group and the chiplet network.
//
// While isolate_i is high the port is cut in both directions: no request
// passes either way and no response is delivered, so a group that is clock
// gated or held in reset can neither send nor receive traffic. Software
// isolates a group only when it has no transaction in flight. isolated_o
// reports the state. The paper states that groups can be isolated from
// their interconnect ports; the cut itself is this design's simplest form.
module mem_isolate #(
  parameter type req_t = occamy_pkg::wide_req_t,
  parameter type rsp_t = occamy_pkg::wide_rsp_t
) (
  input  logic isolate_i,
  input  req_t slv_req_i,
  output rsp_t slv_rsp_o,
  output req_t mst_req_o,
  input  rsp_t mst_rsp_i,
  output logic isolated_o
);
  always_comb begin
    mst_req_o = slv_req_i;
    slv_rsp_o = mst_rsp_i;
    if (isolate_i) begin
      mst_req_o.q_valid = 1'b0;
      mst_req_o.p_ready = 1'b0;
      slv_rsp_o.q_ready = 1'b0;
      slv_rsp_o.p_valid = 1'b0;
    end
  end
  assign isolated_o = isolate_i;
endmodule
