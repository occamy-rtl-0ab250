// One bank of the cluster scratchpad (TCDM).
//
// A 64-bit wide single-port SRAM written as an array, standing in for the
// SRAM macro of the silicon. 128 KiB split over 32 banks gives 512 words of
// 8 bytes per bank, the default below. Reads and writes are accepted every
// cycle; read data appears on rdata_o the cycle after the request (the
// "single-cycle" access of the logarithmic interconnect). Byte enables mask
// writes. The array is not reset, as a real SRAM macro is not.
module tcdm_bank #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned DW    = 64
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [DW-1:0]            wdata_i,
  input  logic [DW/8-1:0]          be_i,
  output logic [DW-1:0]            rdata_o
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < DW/8; b++)
          if (be_i[b]) mem[addr_i][b*8 +: 8] <= wdata_i[b*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
