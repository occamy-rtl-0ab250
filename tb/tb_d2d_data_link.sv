// Testbench of d2d_data_link: two data-link layers wired back to back
// through a packet channel that stalls at random. Both sides send random
// payloads of both classes while the receivers drain at random, so the
// credits run out often. Checks: every payload arrives once, in order per
// class; a sender never holds more than CREDITS credits nor sends without
// one (the receive FIFOs would overflow: an assertion in the design); a
// full frame takes NPKT packet slots.
module tb_d2d_data_link;
  localparam int PL = 100, PK = 48, CR = 4;
  logic clk = 0, rst_n = 0;
  logic [1:0] tv, tc, tr;
  logic [1:0][PL-1:0] tpl;
  logic [1:0][1:0] can, rxv, rxr;
  logic [1:0][1:0][PL-1:0] rxpl;
  logic [1:0] pv, pr;
  logic [1:0][PK-1:0] pk;
  logic [1:0][1:0][3:0] cred;
  logic [PL-1:0] q [2][2][$];   // [sender][class]
  int checks = 0, failures = 0, recv = 0, starved = 0;
  logic [1:0] chan_ok;

  for (genvar s = 0; s < 2; s++) begin : g_s
    d2d_data_link #(.PL_W(PL), .PKT_W(PK), .CREDITS(CR)) i_dl (
      .clk_i(clk), .rst_ni(rst_n), .tx_valid_i(tv[s]), .tx_cls_i(tc[s]), .tx_pl_i(tpl[s]),
      .tx_ready_o(tr[s]), .tx_can_o(can[s]), .rx_valid_o(rxv[s]), .rx_pl_o(rxpl[s]),
      .rx_ready_i(rxr[s]), .pkt_valid_o(pv[s]), .pkt_o(pk[s]), .pkt_ready_i(pr[s]),
      .pkt_valid_i(pv[1-s] && pr[1-s]), .pkt_i(pk[1-s]), .credits_o(cred[s]));
    assign pr[s] = chan_ok[s];
  end
  always #1 clk = ~clk;
  initial begin #4000000 $display("watchdog"); $fatal(1); end

  always @(posedge clk) begin
    if (!rst_n) begin tv <= 0; tc <= 0; tpl <= '0; rxr <= 0; chan_ok <= 0; end
    else begin
      chan_ok <= {($urandom % 4 != 0), ($urandom % 4 != 0)};
      for (int s = 0; s < 2; s++) begin
        if (tv[s] && tr[s]) q[s][tc[s]].push_back(tpl[s]);
        if (tv[s] && !tr[s] && !can[s][tc[s]]) starved++;
        if (!tv[s] || tr[s]) begin
          tv[s] <= ($urandom % 2 == 0);
          tc[s] <= 1'($urandom);
          tpl[s] <= {$urandom, $urandom, $urandom, $urandom};
        end
        for (int c = 0; c < 2; c++) begin
          rxr[s][c] <= ($urandom % 5 == 0);
          if (rxv[s][c] && rxr[s][c]) begin
            checks++; recv++;
            if (q[1-s][c].size() == 0 || q[1-s][c].pop_front() != rxpl[s][c]) begin
              failures++; $display("side %0d class %0d payload differs", s, c);
            end
          end
          if (cred[s][c] > CR) begin failures++; $display("credit overflow"); end
        end
      end
    end
  end
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (20000) @(negedge clk);
    checks++;
    if (starved == 0) begin failures++; $display("credits never ran out"); end
    checks++;
    if (recv < 500) begin failures++; $display("only %0d payloads", recv); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
