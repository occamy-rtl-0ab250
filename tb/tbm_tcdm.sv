// Scratchpad model with N TCDM ports for testbenches: each request is
// granted with a chance of GNT_PCT percent (to create stalls) and answered
// one cycle later, like the real TCDM. A word never written reads as
// dflt(word address), so tests can predict it; poke/peek give direct access.
module tbm_tcdm #(
  parameter int unsigned N       = 1,
  parameter int unsigned GNT_PCT = 70
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  occamy_pkg::tcdm_req_t  req_i [N],
  output occamy_pkg::tcdm_rsp_t  rsp_o [N]
);
  logic [63:0] mem [longint unsigned];
  logic [N-1:0] gnt, rvalid;
  logic [63:0]  rdata [N];

  function automatic logic [63:0] dflt(logic [31:0] waddr);
    return {waddr ^ 32'h5a5a_5a5a, waddr};
  endfunction
  function automatic logic [63:0] peek(logic [31:0] byte_addr);
    longint unsigned w;
    w = longint'(byte_addr >> 3);
    return mem.exists(w) ? mem[w] : dflt(32'(w));
  endfunction
  task automatic poke(logic [31:0] byte_addr, logic [63:0] d, logic [7:0] be);
    longint unsigned w;
    logic [63:0] o;
    w = longint'(byte_addr >> 3);
    o = peek(byte_addr);
    for (int b = 0; b < 8; b++) if (be[b]) o[8*b +: 8] = d[8*b +: 8];
    mem[w] = o;
  endtask

  always @(posedge clk_i) begin
    for (int p = 0; p < N; p++) gnt[p] <= ($urandom % 100) < GNT_PCT;
  end
  always @(posedge clk_i or negedge rst_ni) begin
    for (int p = 0; p < N; p++) begin
      if (!rst_ni) begin
        rvalid[p] <= 1'b0;
        rdata[p]  <= '0;
      end else begin
        rvalid[p] <= req_i[p].req && gnt[p];
        if (req_i[p].req && gnt[p]) begin
          if (req_i[p].we) poke(req_i[p].addr, req_i[p].wdata, req_i[p].be);
          else rdata[p] <= peek(req_i[p].addr);
        end
      end
    end
  end
  for (genvar p = 0; p < N; p++) begin : g_g
    assign rsp_o[p].gnt    = gnt[p];
    assign rsp_o[p].rvalid = rvalid[p];
    assign rsp_o[p].rdata  = rdata[p];
  end
endmodule
