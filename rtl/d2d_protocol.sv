// Protocol layer of a die-to-die segment: turns the on-chip bus into
// payloads for the data-link layer and back.
//
// Outgoing: requests arriving on the slave port (local masters addressing
// the other chiplet) become request-class payloads; responses coming back on
// the master port (to requests the other chiplet made here) become
// response-class payloads. Responses win when both are ready, and a payload
// is only offered for a class that currently holds a credit, so a starved
// class never blocks the other. Incoming: request payloads are replayed on
// the master port into the local network, response payloads are returned on
// the slave port. The ID travels unchanged, so the remote interconnect routes
// the response back. Payload width is the larger of request and response.
// The paper's protocol layer bundles AXI channels into AXI-Stream payloads
// and arbitrates them; the exact packing is this design's choice.
module d2d_protocol #(
  parameter type req_t = occamy_pkg::wide_req_t,
  parameter type rsp_t = occamy_pkg::wide_rsp_t,
  parameter type q_t   = occamy_pkg::wide_q_t,
  parameter type p_t   = occamy_pkg::wide_p_t,
  parameter int unsigned PL_W = ($bits(q_t) > $bits(p_t)) ? $bits(q_t) : $bits(p_t)
) (
  // local masters -> remote
  input  req_t            slv_req_i,
  output rsp_t            slv_rsp_o,
  // remote masters -> local
  output req_t            mst_req_o,
  input  rsp_t            mst_rsp_i,
  // data-link layer
  output logic            tx_valid_o,
  output logic            tx_cls_o,
  output logic [PL_W-1:0] tx_pl_o,
  input  logic            tx_ready_i,
  input  logic [1:0]      tx_can_i,
  input  logic [1:0]      rx_valid_i,
  input  logic [1:0][PL_W-1:0] rx_pl_i,
  output logic [1:0]      rx_ready_o
);
  logic send_rsp;
  assign send_rsp   = mst_rsp_i.p_valid && tx_can_i[1];
  assign tx_cls_o   = send_rsp;
  assign tx_valid_o = send_rsp || (slv_req_i.q_valid && tx_can_i[0]);
  assign tx_pl_o    = send_rsp ? PL_W'(mst_rsp_i.p) : PL_W'(slv_req_i.q);

  always_comb begin
    mst_req_o         = '0;
    mst_req_o.q_valid = rx_valid_i[0];
    mst_req_o.q       = q_t'(rx_pl_i[0][$bits(q_t)-1:0]);
    mst_req_o.p_ready = tx_ready_i && send_rsp;
    slv_rsp_o         = '0;
    slv_rsp_o.q_ready = tx_ready_i && !send_rsp && tx_can_i[0];
    slv_rsp_o.p_valid = rx_valid_i[1];
    slv_rsp_o.p       = p_t'(rx_pl_i[1][$bits(p_t)-1:0]);
  end
  assign rx_ready_o[0] = mst_rsp_i.q_ready;
  assign rx_ready_o[1] = slv_req_i.p_ready;
endmodule
