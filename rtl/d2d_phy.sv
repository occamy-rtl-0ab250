// All-digital source-synchronous PHY of the die-to-die link, one channel:
// eight double-data-rate lanes plus a forwarded clock in each direction.
//
// Transmitter: the PHY clock is the system clock divided by CLK_DIV (1 GHz
// / 8 = 125 MHz by default). Each PHY clock period carries one 16-bit word:
// bits [7:0] on the lanes while the forwarded clock is high (from its rising
// edge) and bits [15:8] while it is low (from its falling edge). The
// forwarded clock only toggles while words are sent, so its edges mark the
// data; with a steady stream a word is accepted (tx_ready_o) once per period.
// Receiver: the forwarded clock and the lanes pass two synchronising flops
// into the system clock domain together; a rising edge captures the low
// byte, the following falling edge the high byte, and the word is delivered
// with rx_valid_o for one cycle. There is no backpressure at this level.
// 8 lanes x 2 edges x 125 MHz = 2 Gb/s raw per direction, as in the paper.
// The sampling scheme is this design's choice; the paper states that the
// transmitter forwards a clock derived from the system clock and that the
// receiver synchronises packets to the system clock.
module d2d_phy #(
  parameter int unsigned LANES   = 8,
  parameter int unsigned CLK_DIV = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // transmit side
  input  logic               tx_valid_i,
  input  logic [2*LANES-1:0] tx_data_i,
  output logic               tx_ready_o,
  output logic               tx_clk_o,
  output logic [LANES-1:0]   tx_lanes_o,
  // receive side
  input  logic               rx_clk_i,
  input  logic [LANES-1:0]   rx_lanes_i,
  output logic               rx_valid_o,
  output logic [2*LANES-1:0] rx_data_o
);
  localparam int unsigned PB = $clog2(CLK_DIV);

  // ---------------- transmitter ----------------
  logic               busy_q;
  logic [PB-1:0]      phase_q;
  logic [2*LANES-1:0] word_q;

  assign tx_ready_o = !busy_q || (phase_q == PB'(CLK_DIV - 1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q  <= 1'b0;
      phase_q <= '0;
      word_q  <= '0;
    end else if (tx_ready_o) begin
      busy_q  <= tx_valid_i;
      phase_q <= '0;
      if (tx_valid_i) word_q <= tx_data_i;
    end else begin
      phase_q <= phase_q + 1'b1;
    end
  end

  assign tx_clk_o   = busy_q && (phase_q < PB'(CLK_DIV / 2));
  assign tx_lanes_o = (phase_q < PB'(CLK_DIV / 2)) ? word_q[LANES-1:0] : word_q[2*LANES-1:LANES];

  // ---------------- receiver ----------------
  logic [2:0]         clk_sync_q;
  logic [LANES-1:0]   lanes_s1_q, lanes_s2_q;
  logic [LANES-1:0]   low_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      clk_sync_q <= '0;
      lanes_s1_q <= '0;
      lanes_s2_q <= '0;
      low_q      <= '0;
      rx_valid_o <= 1'b0;
      rx_data_o  <= '0;
    end else begin
      clk_sync_q <= {clk_sync_q[1:0], rx_clk_i};
      lanes_s1_q <= rx_lanes_i;
      lanes_s2_q <= lanes_s1_q;
      rx_valid_o <= 1'b0;
      if (clk_sync_q[1] && !clk_sync_q[2]) low_q <= lanes_s2_q;
      if (!clk_sync_q[1] && clk_sync_q[2]) begin
        rx_valid_o <= 1'b1;
        rx_data_o  <= {lanes_s2_q, low_q};
      end
    end
  end
endmodule
