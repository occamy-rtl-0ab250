// Testbench of cluster_tcdm: 34 narrow masters (cores, stream units, DMA
// core, narrow slave) and the 512-bit DMA port hammer the 32 banks at once.
// Each master owns its own rows, so every read can be checked against one
// reference copy. Checks: read data, rvalid one cycle after a grant, bank
// conflicts really happen, the wide port has priority (no narrow grant in
// the superbank the wide port uses in that cycle) and, alone, the wide port
// moves 64 bytes per cycle.
module tb_cluster_tcdm;
  import occamy_pkg::*;
  localparam int NM = 34;
  logic clk = 0, rst_n = 0;
  tcdm_req_t nreq [NM]; tcdm_rsp_t nrsp [NM];
  wide_req_t wreq; wide_rsp_t wrsp;
  logic [NM-1:0] conflict;
  logic [63:0] model [16384];
  bit known [16384];
  logic [511:0] wexp;
  logic [63:0] nexp [NM];
  bit npend [NM], nrd [NM], wpend, wrd;
  int checks = 0, failures = 0, conflicts = 0, wide_acc = 0, prio_viol = 0;
  bit narrow_on = 1, wide_on = 1, wide_full = 0;
  cluster_tcdm #(.NR_MASTERS(NM), .NR_BANKS(32), .BANK_WORDS(512), .SB_BANKS(8)) dut (
    .clk_i(clk), .rst_ni(rst_n), .narrow_req_i(nreq), .narrow_rsp_o(nrsp),
    .wide_req_i(wreq), .wide_rsp_o(wrsp), .conflict_o(conflict));
  always #1 clk = ~clk;
  initial begin #4000000 $display("watchdog"); $fatal(1); end

  // word index = row * 32 + bank; master m owns rows m, m+34, ... below 408,
  // the wide port owns rows 408..511
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int m = 0; m < NM; m++) begin nreq[m] <= '0; npend[m] = 0; end
      wreq <= '0; wpend = 0;
    end else begin
      // narrow side
      for (int m = 0; m < NM; m++) begin
        if (npend[m]) begin
          checks++;
          if (!nrsp[m].rvalid) begin failures++; $display("m%0d no rvalid", m); end
          else if (nrd[m] && nrsp[m].rdata != nexp[m]) begin
            failures++; $display("m%0d read %h exp %h", m, nrsp[m].rdata, nexp[m]);
          end
          npend[m] = 0;
        end
        if (nreq[m].req && nrsp[m].gnt) begin
          int w;
          w = int'(nreq[m].addr[16:3]);
          if (wreq.q_valid && wrsp.q_ready && nreq[m].addr[7:6] == wreq.q.addr[7:6]) prio_viol++;
          npend[m] = 1; nrd[m] = !nreq[m].we;
          if (nreq[m].we) begin
            known[w] = 1;
            for (int b = 0; b < 8; b++) if (nreq[m].be[b]) model[w][8*b +: 8] = nreq[m].wdata[8*b +: 8];
          end else nexp[m] = model[w];
        end
        if (conflict[m]) conflicts++;
        if (!nreq[m].req || nrsp[m].gnt) begin
          tcdm_req_t r;
          int row;
          row = m + 34 * ($urandom % 12);
          r.req = narrow_on && ($urandom % 2 == 0);
          r.addr = 32'((row * 32 + $urandom % 32) * 8);
          r.we = ($urandom % 2 == 0) || !known[r.addr[16:3]];
          r.wdata = {$urandom, $urandom};
          r.be = known[r.addr[16:3]] ? 8'($urandom) : 8'hff;
          nreq[m] <= r;
        end
      end
      // wide side
      if (wpend && wrsp.p_valid) begin
        checks++;
        if (wrd && wrsp.p.rdata != wexp) begin failures++; $display("wide read differs"); end
        wpend = 0;
      end
      if (wreq.q_valid && wrsp.q_ready) begin
        int w0;
        w0 = int'(wreq.q.addr[16:6]) * 8;
        wide_acc++;
        wpend = 1; wrd = !wreq.q.write;
        for (int i = 0; i < 8; i++) begin
          if (wreq.q.write) begin
            known[w0+i] = 1;
            for (int b = 0; b < 8; b++) if (wreq.q.strb[8*i+b]) model[w0+i][8*b +: 8] = wreq.q.wdata[64*i+8*b +: 8];
          end else wexp[64*i +: 64] = model[w0+i];
        end
      end
      if (!wreq.q_valid || wrsp.q_ready) begin
        wide_req_t r;
        r = '0;
        r.q_valid = wide_on && (wide_full || $urandom % 4 != 0);
        r.q.addr = 48'((408 + $urandom % 104) * 256 + ($urandom % 4) * 64);
        r.q.write = ($urandom % 2 == 0) || !known[r.q.addr[16:3]];
        for (int i = 0; i < 16; i++) r.q.wdata[32*i +: 32] = $urandom;
        r.q.strb = known[r.q.addr[16:3]] ? {$urandom, $urandom} : '1;
        r.p_ready = 1;
        wreq <= r;
      end
    end
  end
  initial begin
    int a0;
    for (int i = 0; i < 16384; i++) begin model[i] = 0; known[i] = 0; end
    for (int m = 0; m < NM; m++) begin nexp[m] = 0; nrd[m] = 0; end
    wexp = 0; wrd = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // initialise the memory through the wide port alone (64 B per access)
    narrow_on = 0;
    for (int i = 0; i < 2; i++) @(negedge clk);
    repeat (5000) @(negedge clk);
    narrow_on = 1;
    repeat (5000) @(negedge clk);
    // wide port alone: throughput
    narrow_on = 0; wide_full = 1;
    repeat (10) @(negedge clk);
    a0 = wide_acc;
    repeat (1000) @(negedge clk);
    checks++;
    if (wide_acc - a0 < 998) begin failures++; $display("wide rate %0d per 1000 cycles", wide_acc - a0); end
    checks++;
    if (conflicts == 0) begin failures++; $display("no bank conflicts seen"); end
    checks++;
    if (prio_viol != 0) begin failures++; $display("%0d narrow grants inside the wide superbank", prio_viol); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
