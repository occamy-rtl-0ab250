// Testbench of mem_xbar: three masters share two scratchpads through the
// crossbar (one of them behind a register slice); each master owns windows
// in both memories, so all answers can be checked; the bit above the window
// picks the slave. Also checks that the crossbar saw contention (two masters
// wanting the same slave in one cycle) and that ids come back unchanged.
module tb_mem_xbar;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  narrow_req_t mreq [3], sreq [2], creq;
  narrow_rsp_t mrsp [3], srsp [2], crsp;
  logic sel [3];
  int checks [3], failures [3], done [3], lat [3];
  int contention = 0;
  for (genvar m = 0; m < 3; m++) begin : g_m
    logic [47:0] base;
    // alternate between slaves: window m*4096 in slave 0 or in slave 1 (bit 16)
    always @(posedge clk) base <= (48'($urandom % 2) << 16) | (48'(m) << 12);
    tbm_master #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t), .DW(64), .SPAN(4096),
                 .ID(32'(m + 3)), .PCT(70)) i_m (
      .clk_i(clk), .rst_ni(rst_n), .en_i(1'b1), .base_i(base), .req_o(mreq[m]), .rsp_i(mrsp[m]),
      .checks_o(checks[m]), .failures_o(failures[m]), .done_o(done[m]), .lat_max_o(lat[m]));
    assign sel[m] = mreq[m].q.addr[16];
  end
  mem_xbar #(.NM(3), .NS(2), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(mreq), .slv_rsp_o(mrsp), .sel_i(sel),
    .mst_req_o(sreq), .mst_rsp_i(srsp));
  spm_mem #(.BYTES(65536), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_s0 (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(sreq[0]), .slv_rsp_o(srsp[0]));
  mem_cut #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_cut (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(sreq[1]), .slv_rsp_o(srsp[1]),
    .mst_req_o(creq), .mst_rsp_i(crsp));
  spm_mem #(.BYTES(65536), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_s1 (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(creq), .slv_rsp_o(crsp));
  always @(posedge clk) begin
    int n0, n1;
    n0 = 0; n1 = 0;
    for (int m = 0; m < 3; m++) if (mreq[m].q_valid) begin
      if (sel[m]) n1++; else n0++;
    end
    if (n0 > 1 || n1 > 1) contention++;
  end
  always #1 clk = ~clk;
  initial begin #2000000 $display("watchdog"); $fatal(1); end
  initial begin
    int c, f;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (done[0] >= 1500 && done[1] >= 1500 && done[2] >= 1500);
    @(negedge clk);
    c = 1; f = 0;
    for (int m = 0; m < 3; m++) begin c += checks[m]; f += failures[m]; end
    if (contention == 0) begin f++; $display("no contention seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
