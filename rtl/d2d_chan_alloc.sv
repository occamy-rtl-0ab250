// Channel allocator of the wide die-to-die segment.
//
// A packet is N_PHY 16-bit chunks (one word per PHY when all are working).
// Only the PHYs enabled in phy_en_i carry data. With k enabled PHYs the
// packet goes out in ceil(N_PHY/k) rounds: in each round the i-th enabled
// PHY (counting from PHY 0) sends chunk (round base + i), and the round base
// grows by k. So bandwidth falls linearly with the number of disabled PHYs,
// and no chunk is lost. The receiver, configured with the same mask,
// buffers each PHY's words (the PHYs may deliver a word a cycle apart), waits
// until every PHY of the round has one, puts the chunks back in place and
// delivers the packet with rx_pkt_valid_o for one cycle.
//
// Raw mode (raw_i) is the calibration pattern: every PHY, enabled or not,
// sends a counting word {count ^ 8'ha5, count}; each receiver checks the
// sequence and sets a sticky phy_err_o bit on a mismatch, so software can
// find the faulty PHYs and disable them. Leaving raw mode clears the flags'
// reference counters (the flags themselves stay until raw mode restarts).
// Both sides must use the same mask. Chunk placement and the raw pattern
// are this design's own; reshuffling over working PHYs with linear
// bandwidth loss and raw-mode fault detection follow the paper.
module d2d_chan_alloc #(
  parameter int unsigned N_PHY = 38,
  localparam int unsigned PKT_W = 16 * N_PHY,
  localparam int unsigned CB = $clog2(N_PHY + 1)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [N_PHY-1:0]   phy_en_i,
  input  logic               raw_i,
  output logic [N_PHY-1:0]   phy_err_o,
  // packets from / to the data-link layer
  input  logic               tx_pkt_valid_i,
  input  logic [PKT_W-1:0]   tx_pkt_i,
  output logic               tx_pkt_ready_o,
  output logic               rx_pkt_valid_o,
  output logic [PKT_W-1:0]   rx_pkt_o,
  // words to / from the PHYs
  output logic [N_PHY-1:0]       phy_tx_valid_o,
  output logic [N_PHY-1:0][15:0] phy_tx_data_o,
  input  logic [N_PHY-1:0]       phy_tx_ready_i,
  input  logic [N_PHY-1:0]       phy_rx_valid_i,
  input  logic [N_PHY-1:0][15:0] phy_rx_data_i
);
  // rank of each PHY among the enabled ones, and their number
  logic [CB-1:0] rank [N_PHY];
  logic [CB-1:0] n_en;
  always_comb begin
    n_en = '0;
    for (int i = 0; i < N_PHY; i++) begin
      rank[i] = n_en;
      if (phy_en_i[i]) n_en = n_en + 1'b1;
    end
  end

  // ---------------- transmit ----------------
  logic [CB-1:0]  tx_base_q;
  logic [N_PHY-1:0] tx_part;
  logic           tx_all_ready, tx_last;
  logic [7:0]     raw_tx_q;

  always_comb begin
    for (int i = 0; i < N_PHY; i++)
      tx_part[i] = phy_en_i[i] && (32'(tx_base_q) + 32'(rank[i]) < N_PHY);
    tx_all_ready = &(phy_tx_ready_i | ~(raw_i ? {N_PHY{1'b1}} : tx_part));
    tx_last      = (32'(tx_base_q) + 32'(n_en) >= N_PHY);
    for (int i = 0; i < N_PHY; i++) begin
      int unsigned c;
      c = 32'(tx_base_q) + 32'(rank[i]);
      if (raw_i) begin
        phy_tx_valid_o[i] = tx_all_ready;
        phy_tx_data_o[i]  = {raw_tx_q ^ 8'ha5, raw_tx_q};
      end else begin
        phy_tx_valid_o[i] = tx_pkt_valid_i && tx_part[i] && tx_all_ready && (n_en != 0);
        phy_tx_data_o[i]  = (c < N_PHY) ? tx_pkt_i[16*c +: 16] : 16'h0;
      end
    end
  end
  assign tx_pkt_ready_o = !raw_i && tx_pkt_valid_i && tx_all_ready && tx_last && (n_en != 0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tx_base_q <= '0;
      raw_tx_q  <= '0;
    end else if (raw_i) begin
      tx_base_q <= '0;
      if (tx_all_ready) raw_tx_q <= raw_tx_q + 1'b1;
    end else begin
      raw_tx_q <= '0;
      if (tx_pkt_valid_i && tx_all_ready && n_en != 0)
        tx_base_q <= tx_last ? '0 : tx_base_q + n_en;
    end
  end

  // ---------------- receive ----------------
  logic [N_PHY-1:0]       rf_valid, rf_pop;
  logic [N_PHY-1:0][15:0] rf_data;
  logic [CB-1:0]          rx_base_q;
  logic [N_PHY-1:0]       rx_part;
  logic                   rx_round, rx_last;
  logic [PKT_W-1:0]       rx_buf_q;
  logic [7:0]             raw_rx_q [N_PHY];

  for (genvar i = 0; i < N_PHY; i++) begin : g_rxf
    logic [2:0] cnt;  // occupancy, unused: credits bound the fill
    logic       rdy;  // always set for the same reason
    sync_fifo #(.WIDTH(16), .DEPTH(4)) i_fifo (
      .clk_i, .rst_ni, .flush_i(raw_i), .push_i(phy_rx_valid_i[i] && !raw_i),
      .data_i(phy_rx_data_i[i]), .ready_o(rdy), .pop_i(rf_pop[i]), .data_o(rf_data[i]),
      .valid_o(rf_valid[i]), .count_o(cnt));
  end

  always_comb begin
    for (int i = 0; i < N_PHY; i++)
      rx_part[i] = phy_en_i[i] && (32'(rx_base_q) + 32'(rank[i]) < N_PHY);
    rx_round = !raw_i && (n_en != 0) && ((rf_valid & rx_part) == rx_part);
    rx_last  = (32'(rx_base_q) + 32'(n_en) >= N_PHY);
    rf_pop   = rx_round ? rx_part : '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_base_q      <= '0;
      rx_buf_q       <= '0;
      rx_pkt_valid_o <= 1'b0;
      rx_pkt_o       <= '0;
      phy_err_o      <= '0;
      for (int i = 0; i < N_PHY; i++) raw_rx_q[i] <= '0;
    end else begin
      rx_pkt_valid_o <= 1'b0;
      if (raw_i) begin
        rx_base_q <= '0;
        for (int i = 0; i < N_PHY; i++) begin
          if (phy_rx_valid_i[i]) begin
            raw_rx_q[i] <= raw_rx_q[i] + 1'b1;
            if (phy_rx_data_i[i] != {raw_rx_q[i] ^ 8'ha5, raw_rx_q[i]}) phy_err_o[i] <= 1'b1;
          end
        end
      end else begin
        for (int i = 0; i < N_PHY; i++) raw_rx_q[i] <= '0;
        if (rx_round) begin
          logic [PKT_W-1:0] nb;
          nb = rx_buf_q;
          for (int i = 0; i < N_PHY; i++) begin
            int unsigned c;
            c = 32'(rx_base_q) + 32'(rank[i]);
            if (rx_part[i]) nb[16*c +: 16] = rf_data[i];
          end
          rx_buf_q <= nb;
          if (rx_last) begin
            rx_base_q      <= '0;
            rx_pkt_valid_o <= 1'b1;
            rx_pkt_o       <= nb;
          end else begin
            rx_base_q <= rx_base_q + n_en;
          end
        end
      end
    end
  end
endmodule
