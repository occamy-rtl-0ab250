// Testbench of sync_fifo: random push/pop traffic against a queue model;
// checks order, data, full/empty flags, the fill count and flush.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, flush, push, pop, ready, valid;
  logic [15:0] din, dout;
  logic [2:0] count;
  logic [15:0] q [$];
  int checks = 0, failures = 0;
  sync_fifo #(.WIDTH(16), .DEPTH(4)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush),
    .push_i(push), .data_i(din), .ready_o(ready), .pop_i(pop), .data_o(dout), .valid_o(valid),
    .count_o(count));
  always #1 clk = ~clk;
  initial begin #200000 $display("watchdog"); $fatal(1); end
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    flush = 0; push = 0; pop = 0; din = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      check(valid == (q.size() != 0), "valid");
      check(ready == (q.size() != 4), "ready");
      check(32'(count) == q.size(), "count");
      if (valid && q.size() != 0) check(dout == q[0], "data");
      push = ($urandom % 3 != 0) && ready;
      pop  = ($urandom % 2 == 0) && valid;
      din  = 16'($urandom);
      flush = (n % 997 == 500);
      @(posedge clk); #0;
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
