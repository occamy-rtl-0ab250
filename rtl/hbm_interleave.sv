// Channel selection of the HBM crossbar.
//
// The 16 GiB HBM2E region is served by N_CH channel controllers of 2 GiB
// each. Without interleaving, the upper address bits pick the channel, so
// each channel owns one contiguous 2 GiB block. With interleave_i set,
// consecutive pages (2^PAGE_BITS bytes) go to consecutive channels: the
// channel is taken from the bits right above the page offset, and the
// remaining bits close up to form the address inside the channel. The
// mapping can be switched at run time, as the paper describes; the page
// size of 4 KiB is this design's choice. Purely combinational.
module hbm_interleave #(
  parameter int unsigned N_CH      = 8,
  parameter int unsigned HBM_BITS  = 34,
  parameter int unsigned PAGE_BITS = 12,
  localparam int unsigned CB = $clog2(N_CH)
) (
  input  logic                interleave_i,
  input  logic [HBM_BITS-1:0] addr_i,     // offset inside the HBM region
  output logic [CB-1:0]       ch_o,
  output logic [HBM_BITS-1:0] ch_addr_o   // offset inside the channel
);
  always_comb begin
    if (interleave_i) begin
      ch_o      = addr_i[PAGE_BITS +: CB];
      ch_addr_o = HBM_BITS'({addr_i[HBM_BITS-1:PAGE_BITS+CB], addr_i[PAGE_BITS-1:0]});
    end else begin
      ch_o      = addr_i[HBM_BITS-1 -: CB];
      ch_addr_o = HBM_BITS'(addr_i[HBM_BITS-CB-1:0]);
    end
  end
endmodule
