// Testbench of spm_mem: random reads and masked writes from one master,
// compared with a reference copy; the answer must arrive one cycle after
// the request is accepted (the scratchpad's one-cycle access).
module tb_spm_mem;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  wide_req_t req; wide_rsp_t rsp;
  int checks, failures, done, lat;
  tbm_master #(.req_t(wide_req_t), .rsp_t(wide_rsp_t), .DW(512), .SPAN(65536), .PCT(100)) i_m (
    .clk_i(clk), .rst_ni(rst_n), .en_i(1'b1), .base_i(48'h0), .req_o(req), .rsp_i(rsp),
    .checks_o(checks), .failures_o(failures), .done_o(done), .lat_max_o(lat));
  spm_mem #(.BYTES(1048576), .req_t(wide_req_t), .rsp_t(wide_rsp_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(req), .slv_rsp_o(rsp));
  always #1 clk = ~clk;
  initial begin #400000 $display("watchdog"); $fatal(1); end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    wait (done >= 3000);
    @(negedge clk);
    // issue at cycle t, accepted at once, answer seen at t+2 by the master
    if (lat > 2) begin $display("latency %0d", lat); failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures);
    $finish;
  end
endmodule
