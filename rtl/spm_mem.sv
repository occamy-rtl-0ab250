// Scratchpad memory with a port of the request/response protocol, used for
// the chiplet's 1 MiB wide SPM and 512 KiB narrow SPM.
//
// An array of DW-bit words (DW taken from the bus type), written as an
// array in place of SRAM macros. One request is accepted per cycle; its
// response (read data, or an acknowledge for a write) follows one cycle
// later and is held until taken. Byte strobes mask writes. The address
// is taken modulo the memory size (the crossbar decodes the region).
module spm_mem import occamy_pkg::*; #(
  parameter int unsigned BYTES = 1048576,
  parameter type req_t = occamy_pkg::wide_req_t,
  parameter type rsp_t = occamy_pkg::wide_rsp_t
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  req_t slv_req_i,
  output rsp_t slv_rsp_o
);
  localparam int unsigned DW    = $bits(slv_req_i.q.wdata);
  localparam int unsigned WORDS = BYTES / (DW / 8);
  localparam int unsigned OB    = $clog2(DW / 8);
  localparam int unsigned IB    = $clog2(WORDS);

  logic [DW-1:0] mem [WORDS];
  logic          pvalid_q;
  logic [DW-1:0] rdata_q;
  logic [ID_W-1:0] id_q;
  logic          fire;
  logic [IB-1:0] idx;

  assign idx  = slv_req_i.q.addr[OB +: IB];
  assign fire = slv_req_i.q_valid && slv_rsp_o.q_ready;

  always_ff @(posedge clk_i) begin
    if (fire) begin
      if (slv_req_i.q.write) begin
        for (int b = 0; b < DW/8; b++)
          if (slv_req_i.q.strb[b]) mem[idx][b*8 +: 8] <= slv_req_i.q.wdata[b*8 +: 8];
      end else begin
        rdata_q <= mem[idx];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pvalid_q <= 1'b0;
      id_q     <= '0;
    end else begin
      if (fire) begin
        pvalid_q <= 1'b1;
        id_q     <= slv_req_i.q.id;
      end else if (slv_req_i.p_ready) begin
        pvalid_q <= 1'b0;
      end
    end
  end

  always_comb begin
    slv_rsp_o         = '0;
    slv_rsp_o.q_ready = !pvalid_q || slv_req_i.p_ready;
    slv_rsp_o.p_valid = pvalid_q;
    slv_rsp_o.p.rdata = rdata_q;
    slv_rsp_o.p.id    = id_q;
    slv_rsp_o.p.err   = 1'b0;
  end
endmodule
