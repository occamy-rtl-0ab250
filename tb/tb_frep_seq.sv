// Testbench of frep_seq: plain instructions pass through; FREP bodies of
// random length are issued R times in order; with out_ready always high a
// body of N instructions repeated R times takes N*R cycles (the FPU is fed
// one instruction per cycle while the core is released).
module tb_frep_seq;
  logic clk = 0, rst_n = 0, in_valid, is_frep, in_ready, out_valid, out_ready, looping;
  logic [31:0] in_instr, reps, out_instr;
  logic [4:0] n;
  int checks = 0, failures = 0;
  logic [31:0] exp [$];
  frep_seq #(.DEPTH(16), .IW(32)) dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid),
    .in_instr_i(in_instr), .in_is_frep_i(is_frep), .in_reps_i(reps), .in_n_i(n),
    .in_ready_o(in_ready), .out_valid_o(out_valid), .out_instr_o(out_instr),
    .out_ready_i(out_ready), .looping_o(looping));
  always #1 clk = ~clk;
  initial begin #2000000 $display("watchdog"); $fatal(1); end
  // output side: compare everything that leaves
  int got = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    got++;
    if (exp.size() == 0) begin failures++; $display("unexpected %h", out_instr); end
    else begin
      logic [31:0] e;
      e = exp.pop_front();
      if (e != out_instr) begin failures++; $display("got %h exp %h", out_instr, e); end
    end
  end
  task automatic send(logic [31:0] ins, bit f, int r, int len);
    in_valid = 1; in_instr = ins; is_frep = f; reps = r; n = 5'(len);
    @(posedge clk); while (!in_ready) @(posedge clk);
    #0; @(negedge clk); in_valid = 0; is_frep = 0;
  endtask
  initial begin
    in_valid = 0; is_frep = 0; in_instr = 0; reps = 0; n = 0; out_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int len, r, t0, t1;
      logic [31:0] body [16];
      len = 1 + $urandom % 16; r = 1 + $urandom % 6;
      for (int i = 0; i < len; i++) body[i] = $urandom;
      for (int k = 0; k < r; k++) for (int i = 0; i < len; i++) exp.push_back(body[i]);
      out_ready = 1;
      send(32'h0, 1, r, len);
      t0 = got;
      for (int i = 0; i < len; i++) send(body[i], 0, 0, 0);
      // the core waits for the loop to end; measure cycles until drained
      t1 = 0;
      while (exp.size() != 0 && t1 < 1000) begin @(negedge clk); t1++; end
      checks++;
      if (got - t0 != len * r) begin failures++; $display("count %0d exp %0d", got - t0, len*r); end
      // cycles after the body was captured: (r-1)*len replays, one per cycle
      checks++;
      if (t1 > (r - 1) * len + 2) begin failures++; $display("replay too slow %0d for %0d", t1, (r-1)*len); end
      // plain instructions with random back-pressure
      for (int i = 0; i < 5; i++) begin
        logic [31:0] x;
        x = $urandom;
        exp.push_back(x);
        out_ready = ($urandom % 2 == 0);
        fork send(x, 0, 0, 0); join_none
        repeat (3) @(negedge clk);
        out_ready = 1;
        wait (!in_valid);
      end
      repeat (3) @(negedge clk);
      checks++;
      if (exp.size() != 0) begin failures++; $display("lost %0d", exp.size()); end
      exp.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
