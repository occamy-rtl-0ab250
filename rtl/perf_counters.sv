// Retargetable performance counters of a cluster.
//
// N_CNT 32-bit counters; each can be pointed at any one of N_EVT event
// inputs and enabled or cleared through a small register port:
//   cfg_addr_i = counter index, cfg_we_i with cfg_wdata_i =
//     {clear[31], enable[30], event select in the low bits}
// A counter adds one in every cycle in which its selected event is high.
// cnt_o shows all counter values. Sixteen counters follow the paper; the
// event list is chosen by the instantiating cluster.
module perf_counters #(
  parameter int unsigned N_CNT = 16,
  parameter int unsigned N_EVT = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic [N_EVT-1:0]         evt_i,
  input  logic                     cfg_we_i,
  input  logic [$clog2(N_CNT)-1:0] cfg_addr_i,
  input  logic [31:0]              cfg_wdata_i,
  output logic [31:0]              cnt_o [N_CNT]
);
  localparam int unsigned EB = $clog2(N_EVT);
  logic [EB-1:0] sel_q [N_CNT];
  logic [N_CNT-1:0] en_q;
  logic [31:0] cnt_q [N_CNT];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q <= '0;
      for (int i = 0; i < N_CNT; i++) begin
        sel_q[i] <= '0;
        cnt_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < N_CNT; i++) begin
        if (cfg_we_i && cfg_addr_i == i[$clog2(N_CNT)-1:0]) begin
          sel_q[i] <= cfg_wdata_i[EB-1:0];
          en_q[i]  <= cfg_wdata_i[30];
          if (cfg_wdata_i[31]) cnt_q[i] <= '0;
        end else if (en_q[i] && evt_i[sel_q[i]]) begin
          cnt_q[i] <= cnt_q[i] + 1;
        end
      end
    end
  end

  assign cnt_o = cnt_q;
endmodule
