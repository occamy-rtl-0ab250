// Register slice for the request/response protocol: both channels pass
// through a two-entry FIFO, so every signal crossing it is registered
// (this breaks combinational paths between crossbars) while one request and
// one response can still pass per cycle. Adds one cycle in each direction.
module mem_cut #(
  parameter type req_t = occamy_pkg::narrow_req_t,
  parameter type rsp_t = occamy_pkg::narrow_rsp_t
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  req_t slv_req_i,
  output rsp_t slv_rsp_o,
  output req_t mst_req_o,
  input  rsp_t mst_rsp_i
);
  localparam int unsigned QW = $bits(slv_req_i.q);
  localparam int unsigned PW = $bits(mst_rsp_i.p);
  logic [QW-1:0] q_out;
  logic [PW-1:0] p_out;
  logic q_ready, q_valid, p_ready, p_valid;
  logic [1:0] qc, pc;

  sync_fifo #(.WIDTH(QW), .DEPTH(2)) i_q (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(slv_req_i.q_valid), .data_i(slv_req_i.q),
    .ready_o(q_ready), .pop_i(mst_rsp_i.q_ready && q_valid), .data_o(q_out), .valid_o(q_valid),
    .count_o(qc));
  sync_fifo #(.WIDTH(PW), .DEPTH(2)) i_p (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(mst_rsp_i.p_valid), .data_i(mst_rsp_i.p),
    .ready_o(p_ready), .pop_i(slv_req_i.p_ready && p_valid), .data_o(p_out), .valid_o(p_valid),
    .count_o(pc));

  always_comb begin
    mst_req_o         = slv_req_i;
    mst_req_o.q_valid = q_valid;
    mst_req_o.q       = q_out;
    mst_req_o.p_ready = p_ready;
    slv_rsp_o         = mst_rsp_i;
    slv_rsp_o.q_ready = q_ready;
    slv_rsp_o.p_valid = p_valid;
    slv_rsp_o.p       = p_out;
  end
endmodule
