// Testbench of muldiv: nine cores issue random RV32M operations at random
// times; each result is compared with a reference model, and the latency
// is checked (multiplication 2 cycles, division at most 35 cycles).
module tb_muldiv;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [8:0] req_valid, req_ready, rsp_valid;
  md_op_e op [9];
  logic [31:0] a [9], b [9], rsp;
  int checks = 0, failures = 0;
  muldiv #(.N_CORES(9)) dut (.clk_i(clk), .rst_ni(rst_n), .req_valid_i(req_valid),
    .req_op_i(op), .req_a_i(a), .req_b_i(b), .req_ready_o(req_ready),
    .rsp_valid_o(rsp_valid), .rsp_data_o(rsp));
  always #5 clk = ~clk;
  initial begin #40000000 $display("watchdog"); $fatal(1); end

  function automatic logic [31:0] model(md_op_e o, logic [31:0] x, logic [31:0] y);
    logic signed [63:0] sx, sy;
    logic [63:0] ux, uy;
    sx = {{32{x[31]}}, x}; sy = {{32{y[31]}}, y}; ux = {32'b0, x}; uy = {32'b0, y};
    case (o)
      MD_MUL:    return x * y;
      MD_MULH:   return 32'((sx * sy) >> 32);
      MD_MULHSU: return 32'((sx * $signed(uy)) >> 32);
      MD_MULHU:  return 32'((ux * uy) >> 32);
      MD_DIV:    return (y == 0) ? '1 : (x == 32'h8000_0000 && y == '1) ? x : 32'($signed(x) / $signed(y));
      MD_DIVU:   return (y == 0) ? '1 : x / y;
      MD_REM:    return (y == 0) ? x : (x == 32'h8000_0000 && y == '1) ? 0 : 32'($signed(x) % $signed(y));
      default:   return (y == 0) ? x : x % y;
    endcase
  endfunction

  logic [31:0] expv [9];
  int t_acc [9];
  bit busy [9];
  int cyc = 0;
  always @(negedge clk) cyc++;
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < 9; c++) begin
      if (rsp_valid[c]) begin
        int lat;
        lat = cyc - t_acc[c];
        checks++;
        if (!busy[c] || rsp != expv[c]) begin failures++; $display("core %0d got %h exp %h", c, rsp, expv[c]); end
        checks++;
        if ((op[c] <= MD_MULHU && lat > 2) || lat > 35) begin failures++; $display("latency %0d op %0d", lat, op[c]); end
        busy[c] = 0;
      end
    end
  end
  initial begin
    req_valid = 0;
    for (int c = 0; c < 9; c++) begin op[c] = MD_MUL; a[c] = 0; b[c] = 0; busy[c] = 0; t_acc[c] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 8000; n++) begin
      @(negedge clk);
      for (int c = 0; c < 9; c++) begin
        if (!busy[c] && !req_valid[c] && $urandom % 4 == 0) begin
          op[c] = md_op_e'($urandom % 8);
          a[c] = ($urandom % 8 == 0) ? 32'h8000_0000 : $urandom;
          b[c] = ($urandom % 8 == 0) ? 0 : ($urandom % 8 == 1) ? '1 : $urandom >> ($urandom % 32);
          expv[c] = model(op[c], a[c], b[c]);
          req_valid[c] = 1;
        end
      end
      #4;
      for (int c = 0; c < 9; c++) if (req_valid[c] && req_ready[c]) begin
        busy[c] = 1; t_acc[c] = cyc;
      end
      @(posedge clk); #1;
      for (int c = 0; c < 9; c++) if (busy[c]) req_valid[c] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
