// Testbench of perf_counters: points counters at random events, enables,
// clears and compares every counter with a model each cycle.
module tb_perf_counters;
  logic clk = 0, rst_n = 0, we;
  logic [31:0] evt, wdata;
  logic [3:0] addr;
  logic [31:0] cnt [16];
  logic [31:0] mcnt [16];
  logic [4:0] msel [16];
  logic men [16];
  int checks = 0, failures = 0;
  perf_counters #(.N_CNT(16), .N_EVT(32)) dut (.clk_i(clk), .rst_ni(rst_n), .evt_i(evt),
    .cfg_we_i(we), .cfg_addr_i(addr), .cfg_wdata_i(wdata), .cnt_o(cnt));
  always #1 clk = ~clk;
  initial begin #200000 $display("watchdog"); $fatal(1); end
  initial begin
    we = 0; evt = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 16; i++) begin mcnt[i] = 0; msel[i] = 0; men[i] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (cnt[i] != mcnt[i]) begin failures++; $display("cnt%0d %0d exp %0d", i, cnt[i], mcnt[i]); end
      end
      evt = $urandom;
      we = ($urandom % 8 == 0);
      addr = 4'($urandom);
      wdata = {($urandom % 16 == 0), ($urandom % 4 != 0), 25'b0, 5'($urandom)};
      @(posedge clk); #0;
      for (int i = 0; i < 16; i++) begin
        if (we && addr == 4'(i)) begin
          msel[i] = wdata[4:0];
          men[i]  = wdata[30];
          if (wdata[31]) mcnt[i] = 0;
        end else if (men[i] && evt[msel[i]]) mcnt[i]++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
