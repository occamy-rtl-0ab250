// Testbench of su_complex: sparse-sparse kernels on the three stream units.
// Two sorted random index arrays (16-bit indices) are joined by the index
// comparator, first as an intersection (sparse dot product pattern), then as
// a union (sparse addition pattern). SU0 and SU1 gather the matching values
// (element base + 8 * index), an FPU model adds the pairs, and SU2 writes
// the sums and the joint indices (32-bit) back. Checks every written value
// and index, the joint-index count register and that all units go idle.
// Memory is a model with random grant stalls.
module tb_su_complex;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we; logic [7:0] addr; logic [31:0] wdata, rdata;
  logic [2:0] rv, rr, wv, wr, busy;
  logic [2:0][63:0] rd, wd;
  tcdm_req_t treq [3]; tcdm_rsp_t trsp [3];
  int checks = 0, failures = 0;
  su_complex #(.FIFO_DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .cfg_we_i(we), .cfg_addr_i(addr),
    .cfg_wdata_i(wdata), .cfg_rdata_o(rdata), .ft_rvalid_o(rv), .ft_rdata_o(rd), .ft_rready_i(rr),
    .ft_wvalid_i(wv), .ft_wdata_i(wd), .ft_wready_o(wr), .tcdm_req_o(treq), .tcdm_rsp_i(trsp),
    .busy_o(busy));
  tbm_tcdm #(.N(3), .GNT_PCT(70)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(treq), .rsp_o(trsp));
  always #1 clk = ~clk;
  initial begin #4000000 $display("watchdog"); $fatal(1); end

  // FPU model: take one value from ft0 and ft1, push their sum into ft2
  logic [63:0] pend_q [$];
  always @(posedge clk) begin
    if (!rst_n) begin rr <= 0; wv <= 0; wd <= '0; end
    else begin
      rr <= 0;
      if (wv[2] && wr[2]) wv[2] <= 0;
      if (rv[0] && rv[1] && !rr[0] && (!wv[2] || wr[2]) && $urandom % 4 != 0) begin
        rr <= 3'b011;
        wv[2] <= 1; wd[2] <= rd[0] + rd[1];
      end
    end
  end

  task automatic cfg(input int su, input int w, input logic [31:0] d);
    @(negedge clk); we = 1; addr = {3'(su), 5'(w)}; wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic run(input cmp_mode_e mode);
    int a [$], b [$], j [$];
    bit ina [64], inb [64];
    logic [63:0] exp;
    int t;
    for (int i = 0; i < 64; i++) begin ina[i] = ($urandom % 3 == 0); inb[i] = ($urandom % 3 == 0); end
    for (int i = 0; i < 64; i++) begin
      if (ina[i]) a.push_back(i);
      if (inb[i]) b.push_back(i);
      if (mode == CMP_INTER ? (ina[i] && inb[i]) : (ina[i] || inb[i])) j.push_back(i);
    end
    for (int k = 0; k < a.size(); k++) i_mem.poke(32'h1000 + 32'(2 * k), 64'(a[k]) << (16 * (k % 4)), 8'h3 << (2 * (k % 4)));
    for (int k = 0; k < b.size(); k++) i_mem.poke(32'h2000 + 32'(2 * k), 64'(b[k]) << (16 * (k % 4)), 8'h3 << (2 * (k % 4)));
    cfg(3, 0, {29'b0, 1'b1, 2'(mode)});                  // comparator with joint-index output
    // SU2: write sums to 0xC000.., joint indices (32 bit) to 0xE000..
    cfg(2, 0, 32'hC000); cfg(2, 10, 32'hE000); cfg(2, 12, 32'(IDX_32)); cfg(2, 13, 32'b11); cfg(2, 14, 0);
    cfg(0, 0, 32'h4000); cfg(0, 10, 32'h1000); cfg(0, 11, 32'(a.size())); cfg(0, 12, 32'(IDX_16));
    cfg(0, 13, 32'b10);
    cfg(1, 0, 32'h8000); cfg(1, 10, 32'h2000); cfg(1, 11, 32'(b.size())); cfg(1, 12, 32'(IDX_16));
    cfg(1, 13, 32'b10);
    cfg(0, 14, 0); cfg(1, 14, 0);
    // wait for the comparator and all units
    t = 0;
    do begin @(negedge clk); addr = {3'd3, 5'd2}; #0; t++; end while ((rdata[3] == 0 || busy != 0 || wv != 0) && t < 20000);
    repeat (4) @(negedge clk);
    addr = {3'd3, 5'd1}; #1;
    checks++;
    if (rdata != 32'(j.size())) begin failures++; $display("mode %0d: jcount %0d exp %0d", mode, rdata, j.size()); end
    for (int k = 0; k < j.size(); k++) begin
      logic [63:0] va, vb;
      va = ina[j[k]] ? i_mem.peek(32'h4000 + 32'(8 * j[k])) : 64'h0;
      vb = inb[j[k]] ? i_mem.peek(32'h8000 + 32'(8 * j[k])) : 64'h0;
      exp = va + vb;
      checks += 2;
      if (i_mem.peek(32'hC000 + 32'(8 * k)) != exp) begin failures++; $display("mode %0d value %0d idx %0d got %h exp %h a %0d b %0d", mode, k, j[k], i_mem.peek(32'hC000 + 32'(8 * k)), exp, ina[j[k]], inb[j[k]]); end
      if (((i_mem.peek(32'hE000 + 32'(4 * k)) >> (32 * (k % 2))) & 64'hffff_ffff) != 64'(j[k]))
        begin failures++; $display("mode %0d index %0d got %h exp %0d", mode, k, i_mem.peek(32'hE000 + 32'(4 * k)), j[k]); end
    end
  endtask

  initial begin
    we = 0; addr = 0; wdata = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      run(CMP_INTER);
      run(CMP_UNION);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
