// Testbench of iotlb: entry 0 remaps a 4-page window read/write, entry 1
// makes another window read-only. Checks the translated address of every
// forwarded request, pass-through of unmatched addresses, error answers for
// denied writes (never forwarded), and normal data through the TLB.
module tb_iotlb;
  import occamy_pkg::*;
  logic clk = 0, rst_n = 0, denied;
  narrow_req_t req, mreq; narrow_rsp_t rsp, mrsp;
  logic [3:0] ev, er, ew;
  logic [3:0][35:0] ein, eout, emask;
  int checks = 0, failures = 0, denies = 0;
  iotlb #(.N_ENTRIES(4), .PAGE_BITS(12), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .ent_valid_i(ev), .ent_in_i(ein), .ent_out_i(eout),
    .ent_mask_i(emask), .ent_r_i(er), .ent_w_i(ew), .slv_req_i(req), .slv_rsp_o(rsp),
    .mst_req_o(mreq), .mst_rsp_i(mrsp), .denied_o(denied));
  spm_mem #(.BYTES(1048576), .req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) i_mem (
    .clk_i(clk), .rst_ni(rst_n), .slv_req_i(mreq), .slv_rsp_o(mrsp));
  always #5 clk = ~clk;
  initial begin #2000000 $display("watchdog"); $fatal(1); end
  always @(posedge clk) if (denied) denies++;

  function automatic logic [47:0] xlate(logic [47:0] a);
    if (a[47:14] == 34'h10) return {34'h3c, a[13:0]};   // 0x40000.. -> 0xf0000..
    return a;
  endfunction

  task automatic access(input logic [47:0] a, input bit wr, input logic [63:0] d,
                        output logic [63:0] rd, output bit err);
    @(negedge clk);
    req = '0; req.q_valid = 1; req.q.addr = a; req.q.write = wr; req.q.wdata = d;
    req.q.strb = '1; req.q.id = 32'h7; req.p_ready = 1;
    #1;
    if (mreq.q_valid) begin
      checks++;
      if (mreq.q.addr != xlate(a)) begin failures++; $display("addr %h -> %h", a, mreq.q.addr); end
    end
    while (!rsp.q_ready) begin @(negedge clk); #1; end
    @(negedge clk); req.q_valid = 0; #1;
    while (!rsp.p_valid) begin @(negedge clk); #1; end
    rd = rsp.p.rdata; err = rsp.p.err;
    checks++;
    if (rsp.p.id != 32'h7) begin failures++; $display("id %h", rsp.p.id); end
    @(negedge clk); req.p_ready = 0;
  endtask

  initial begin
    logic [63:0] rd; bit err;
    logic [63:0] model [logic [47:0]];
    req = '0;
    ev = 4'b0011; er = 4'b0011; ew = 4'b0001;
    ein = '0; eout = '0; emask = '0;
    ein[0] = 36'h40; eout[0] = 36'hf0; emask[0] = 36'h3;   // 4 pages 0x40000 -> 0xf0000
    ein[1] = 36'h80; eout[1] = 36'h80; emask[1] = 36'h0;   // page 0x80000 read-only
    repeat (3) @(negedge clk); rst_n = 1;
    // fill: remapped window and plain addresses
    for (int n = 0; n < 400; n++) begin
      logic [47:0] a;
      logic [63:0] d;
      case ($urandom % 3)
        0: a = 48'h40000 + 48'(($urandom % 2048) * 8);
        1: a = 48'h10000 + 48'(($urandom % 512) * 8);
        default: a = 48'hf0000 + 48'(($urandom % 2048) * 8);
      endcase
      d = {$urandom, $urandom};
      if ($urandom % 2 == 0 || !model.exists(xlate(a))) begin
        access(a, 1, d, rd, err);
        model[xlate(a)] = d;
        checks++; if (err) begin failures++; $display("unexpected error on write %h", a); end
      end else begin
        access(a, 0, 0, rd, err);
        checks++;
        if (err || rd != model[xlate(a)]) begin failures++; $display("read %h got %h exp %h", a, rd, model[xlate(a)]); end
      end
    end
    // read-only page: reads pass, writes are refused with an error
    for (int n = 0; n < 20; n++) begin
      access(48'h80000 + 48'(n * 8), 1, 64'hdead, rd, err);
      checks++; if (!err) begin failures++; $display("write to read-only page accepted"); end
      access(48'h80000 + 48'(n * 8), 0, 0, rd, err);
      checks++; if (err) begin failures++; $display("read of read-only page refused"); end
    end
    checks++;
    if (denies != 20) begin failures++; $display("denied count %0d", denies); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
