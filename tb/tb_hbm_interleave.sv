// Testbench of hbm_interleave: checks both mappings on random addresses
// and that each mapping is one-to-one (channel, offset) <-> address, and
// that consecutive 4 KiB pages land on consecutive channels when enabled.
module tb_hbm_interleave;
  logic il;
  logic [33:0] addr, ch_addr;
  logic [2:0] ch;
  int checks = 0, failures = 0;
  hbm_interleave #(.N_CH(8), .HBM_BITS(34), .PAGE_BITS(12)) dut (.interleave_i(il),
    .addr_i(addr), .ch_o(ch), .ch_addr_o(ch_addr));
  initial begin #100000 $display("watchdog"); $fatal(1); end
  initial begin
    for (int n = 0; n < 4000; n++) begin
      logic [33:0] back;
      il = n[0];
      addr = {$urandom, $urandom};
      #1;
      if (il) back = {ch_addr[30:12], ch, ch_addr[11:0]};
      else    back = {ch, ch_addr[30:0]};
      checks++;
      if (back != addr || ch_addr[33:31] != 0) begin failures++; $display("addr %h ch %0d off %h", addr, ch, ch_addr); end
    end
    il = 1;
    for (int p = 0; p < 64; p++) begin
      addr = 34'(p) << 12; #1;
      checks++;
      if (ch != 3'(p)) begin failures++; $display("page %0d -> ch %0d", p, ch); end
    end
    il = 0;
    for (int p = 0; p < 64; p++) begin
      addr = 34'(p) << 12; #1;
      checks++;
      if (ch != 0) begin failures++; $display("linear page %0d -> ch %0d", p, ch); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
