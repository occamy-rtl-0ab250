// Testbench of the width converters: a 64-bit master reaches a 512-bit
// scratchpad through dw_upsizer, and a 512-bit master reaches a 64-bit
// scratchpad through dw_downsizer. Random reads and masked writes are
// checked against reference copies; a downsized read costs one narrow
// access per 8-byte lane, so its latency must stay within 8 lanes x 3 cycles.
module tb_dw_upsizer;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  narrow_req_t nreq, dn_nreq; narrow_rsp_t nrsp, dn_nrsp;
  wide_req_t   wreq, up_wreq; wide_rsp_t   wrsp, up_wrsp;
  int c0, f0, d0, l0, c1, f1, d1, l1;
  tbm_master #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .DW(64), .SPAN(8192), .ID(32'h11)) i_nm (
    .clk_i(clk), .rst_ni(rst_n), .en_i(1'b1), .base_i(48'h0), .req_o(nreq), .rsp_i(nrsp),
    .checks_o(c0), .failures_o(f0), .done_o(d0), .lat_max_o(l0));
  dw_upsizer dut (.slv_req_i(nreq), .slv_rsp_o(nrsp), .mst_req_o(up_wreq), .mst_rsp_i(up_wrsp));
  spm_mem #(.BYTES(65536), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) i_wmem (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(up_wreq), .slv_rsp_o(up_wrsp));

  tbm_master #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .DW(512), .SPAN(8192), .ID(32'h22)) i_wm (
    .clk_i(clk), .rst_ni(rst_n), .en_i(1'b1), .base_i(48'h0), .req_o(wreq), .rsp_i(wrsp),
    .checks_o(c1), .failures_o(f1), .done_o(d1), .lat_max_o(l1));
  dw_downsizer i_down (.clk_i(clk), .rst_ni(rst_n), .slv_req_i(wreq), .slv_rsp_o(wrsp),
    .mst_req_o(dn_nreq), .mst_rsp_i(dn_nrsp));
  spm_mem #(.BYTES(65536), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_nmem (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(dn_nreq), .slv_rsp_o(dn_nrsp));

  always #1 clk = ~clk;
  initial begin #2000000 $display("watchdog"); $fatal(1); end
  initial begin
    int f;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (d0 >= 2000 && d1 >= 500);
    @(negedge clk);
    f = f0 + f1;
    if (l0 > 2) begin f++; $display("upsizer latency %0d", l0); end
    if (l1 > 26) begin f++; $display("downsizer latency %0d", l1); end
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + 2, f);
    $finish;
  end
endmodule
