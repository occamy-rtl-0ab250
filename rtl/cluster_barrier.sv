// Cluster hardware barrier.
//
// Each of the N_CORES cores raises arrive_i[c] (level) when it reaches the
// barrier and keeps it high until it sees release_o[c]. The barrier counts
// arrivals; when every core taking part (mask_i) has arrived, all of them
// get release_o for exactly one cycle, the cycle after the last arrival,
// and the barrier is ready for the next round. Cores outside mask_i are
// ignored. The paper names the barrier; this protocol is this design's.
module cluster_barrier #(
  parameter int unsigned N_CORES = 9
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [N_CORES-1:0] mask_i,
  input  logic [N_CORES-1:0] arrive_i,
  output logic [N_CORES-1:0] release_o,
  output logic [31:0]        rounds_o
);
  logic [N_CORES-1:0] arrived_q;
  logic [N_CORES-1:0] release_q;
  logic [N_CORES-1:0] now_arrived;
  logic [31:0]        rounds_q;

  assign now_arrived = (arrived_q | (arrive_i & ~release_q)) & mask_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      arrived_q <= '0;
      release_q <= '0;
      rounds_q  <= '0;
    end else if (mask_i != '0 && now_arrived == mask_i) begin
      arrived_q <= '0;
      release_q <= mask_i;
      rounds_q  <= rounds_q + 1;
    end else begin
      arrived_q <= now_arrived;
      release_q <= '0;
    end
  end

  assign release_o = release_q;
  assign rounds_o  = rounds_q;
endmodule
