// Testbench of su_addrgen: random 1D..4D loop nests with random strides
// and random back-pressure; every address is compared with the nested-loop
// formula base + sum(i_d * stride_d), and last_o with the final element.
module tb_su_addrgen;
  logic clk = 0, rst_n = 0, start, valid, ready, last;
  logic [31:0] base, addr;
  logic [3:0][31:0] bound, stride;
  logic [1:0] dims;
  int checks = 0, failures = 0;
  su_addrgen #(.DIMS(4), .AW(32)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start),
    .base_i(base), .bound_i(bound), .stride_i(stride), .dims_i(dims), .valid_o(valid),
    .ready_i(ready), .addr_o(addr), .last_o(last));
  always #1 clk = ~clk;
  initial begin #2000000 $display("watchdog"); $fatal(1); end
  initial begin
    start = 0; ready = 0; base = 0; bound = 0; stride = 0; dims = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [31:0] exp [$];
      int n;
      dims = 2'($urandom);
      base = $urandom & 32'hffff_fff8;
      for (int d = 0; d < 4; d++) begin
        bound[d]  = (d <= dims) ? $urandom % 4 : 0;
        stride[d] = ($urandom % 64) * 8;
      end
      for (int i3 = 0; i3 <= bound[3]; i3++)
        for (int i2 = 0; i2 <= bound[2]; i2++)
          for (int i1 = 0; i1 <= bound[1]; i1++)
            for (int i0 = 0; i0 <= bound[0]; i0++)
              exp.push_back(base + i0*stride[0] + i1*stride[1] + i2*stride[2] + i3*stride[3]);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      n = 0;
      while (exp.size() != 0) begin
        ready = ($urandom % 4 != 0);
        @(posedge clk); #0;
        if (valid && ready) begin
          logic [31:0] e;
          e = exp.pop_front();
          checks++;
          if (addr != e || last != (exp.size() == 0)) begin
            failures++; $display("t%0d elem %0d addr %h exp %h last %0d", t, n, addr, e, last);
          end
          n++;
        end
        @(negedge clk);
      end
      ready = 0;
      repeat (2) @(negedge clk);
      checks++;
      if (valid) begin failures++; $display("extra address after end"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
