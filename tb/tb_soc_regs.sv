// Testbench of soc_regs: writes random values to every writable register
// through the 64-bit bus, reads them back, checks that the configuration
// outputs follow (group control, cache and TLB fields, interleaving, PHY
// masks, raw mode, clock enables), that read-only status registers show
// their inputs, that byte strobes mask writes, that cc_flush is a one-cycle
// pulse and that the reset values are as documented.
module tb_soc_regs;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  narrow_req_t req; narrow_rsp_t rsp;
  group_cfg_t cfg [6];
  logic [5:0] iso;
  logic il, dclk, hclk;
  logic [37:0] wen, werr;
  logic [0:0] nen, nerr;
  logic [1:0] raw;
  int checks = 0, failures = 0;
  soc_regs #(.N_GRP(6), .N_WPHY(38), .N_NPHY(1)) dut (.clk_i(clk), .rst_ni(rst_n), .chip_id_i(1'b1),
    .slv_req_i(req), .slv_rsp_o(rsp), .grp_cfg_o(cfg), .grp_isolated_i(iso),
    .hbm_interleave_o(il), .wide_phy_en_o(wen), .narrow_phy_en_o(nen), .d2d_raw_o(raw),
    .wide_phy_err_i(werr), .narrow_phy_err_i(nerr), .d2d_clk_en_o(dclk), .hbm_clk_en_o(hclk));
  always #5 clk = ~clk;
  initial begin #2000000 $display("watchdog"); $fatal(1); end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic acc(input logic [11:0] off, input bit wr, input logic [63:0] d,
                     input logic [7:0] strb, output logic [63:0] rd);
    @(negedge clk);
    req = '0; req.q_valid = 1; req.q.addr = SOC_REGS_BASE | 48'(off); req.q.write = wr;
    req.q.wdata = d; req.q.strb = strb; req.q.id = 32'h3; req.p_ready = 1;
    #1; while (!rsp.q_ready) begin @(negedge clk); #1; end
    @(negedge clk); req.q_valid = 0; #1;
    while (!rsp.p_valid) begin @(negedge clk); #1; end
    rd = rsp.p.rdata;
    check(rsp.p.id == 32'h3, "id");
    @(negedge clk); req.p_ready = 0;
  endtask
  initial begin
    logic [63:0] rd, v;
    req = '0; iso = 6'b101010; werr = 38'h12_3456_789a; nerr = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    // reset values
    for (int g = 0; g < 6; g++) check(cfg[g].clk_en && cfg[g].rst_n && !cfg[g].isolate && cfg[g].tlb_valid == 0, "group reset");
    check(!il && wen == '1 && nen == 1 && raw == 0 && dclk && hclk, "chiplet reset");
    // group registers
    for (int g = 0; g < 6; g++) begin
      logic [11:0] b;
      b = 12'(g * 256);
      v = {$urandom, $urandom};
      acc(b + 12'h10, 1, v, 8'hff, rd); acc(b + 12'h10, 0, 0, 8'hff, rd);
      check(rd == (v & 64'hffff_ffff_ffff) && cfg[g].cc_base == v[47:0], "cc_base");
      acc(b + 12'h18, 1, v ^ 64'h5555, 8'hff, rd);
      check(cfg[g].cc_mask == 48'(v ^ 64'h5555), "cc_mask");
      acc(b + 12'h08, 1, 1, 8'hff, rd);
      check(cfg[g].cc_enable, "cc_enable");
      for (int e = 0; e < 4; e++) begin
        logic [11:0] eb;
        eb = b + 12'h20 + 12'(e * 32);
        acc(eb, 1, v + 64'(e), 8'hff, rd);
        acc(eb + 8, 1, v - 64'(e), 8'hff, rd);
        acc(eb + 16, 1, 64'(e), 8'hff, rd);
        acc(eb + 24, 1, 64'h5, 8'hff, rd);
        check(cfg[g].tlb_in[e] == 36'(v + 64'(e)) && cfg[g].tlb_out[e] == 36'(v - 64'(e)) &&
              cfg[g].tlb_mask[e] == 36'(e) && cfg[g].tlb_valid[e] && !cfg[g].tlb_r[e] && cfg[g].tlb_w[e], "tlb entry");
        acc(eb + 8, 0, 0, 8'hff, rd);
        check(rd == 64'(36'(v - 64'(e))), "tlb readback");
      end
      // control: isolate, then byte-masked write that must not change it
      acc(b, 1, 64'b0101, 8'hff, rd);
      check(cfg[g].clk_en && !cfg[g].rst_n && cfg[g].isolate, "group control");
      acc(b, 1, 64'b0011, 8'h00, rd);
      check(cfg[g].isolate, "strobe mask");
      acc(b, 1, 64'b1011, 8'hff, rd);
      check(!cfg[g].cc_flush, "flush is a pulse");
      acc(b, 0, 0, 8'hff, rd);
      check(rd == 64'b011, "control readback");
    end
    acc(12'h800, 1, 1, 8'hff, rd); check(il, "interleave");
    acc(12'h808, 1, 64'h3f_0000_ffff, 8'hff, rd); check(wen == 38'h3f_0000_ffff, "wide phy mask");
    acc(12'h818, 1, 3, 8'hff, rd); check(raw == 3, "raw mode");
    acc(12'h830, 1, 2, 8'hff, rd); check(!dclk && hclk, "clock enables");
    acc(12'h820, 0, 0, 8'hff, rd); check(rd == 64'(werr), "phy faults");
    acc(12'h828, 0, 0, 8'hff, rd); check(rd == 1, "narrow phy faults");
    acc(12'h838, 0, 0, 8'hff, rd); check(rd == 64'(iso), "isolation status");
    acc(12'h840, 0, 0, 8'hff, rd); check(rd == 1, "chip id");
    acc(12'h820, 1, 0, 8'hff, rd); acc(12'h820, 0, 0, 8'hff, rd); check(rd == 64'(werr), "read-only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
