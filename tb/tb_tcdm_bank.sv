// Testbench of tcdm_bank: random byte-masked writes and reads against a
// reference array; checks one-cycle read latency and byte-enable masking.
module tb_tcdm_bank;
  logic clk = 0, req, we;
  logic [8:0] addr;
  logic [63:0] wdata, rdata, ref_mem [512];
  logic [7:0] be;
  int checks = 0, failures = 0;
  tcdm_bank #(.WORDS(512), .DW(64)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
    .wdata_i(wdata), .be_i(be), .rdata_o(rdata));
  always #1 clk = ~clk;
  initial begin #200000 $display("watchdog"); $fatal(1); end
  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; be = 0;
    // initialise every row
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 9'(i); be = '1; wdata = {$urandom, $urandom};
      ref_mem[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req = 1; we = ($urandom % 2) == 1; addr = 9'($urandom); be = 8'($urandom);
      wdata = {$urandom, $urandom};
      if (we) begin
        for (int b = 0; b < 8; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        logic [63:0] exp;
        exp = ref_mem[addr];
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== exp) begin failures++; $display("row %0d got %h exp %h", addr, rdata, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
