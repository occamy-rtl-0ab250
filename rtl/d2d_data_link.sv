// Data-link layer of a die-to-die segment: framing, credit-based flow
// control and splitting of frames into PHY packets.
//
// Each payload from the protocol layer belongs to a class, request or
// response. A frame is {payload, class/type (2 b), request credits returned
// (CRB b), response credits returned (CRB b)}, padded to NPKT packets of
// PKT_W bits, which go out one after the other through the channel allocator
// (NPKT = 2 for the wide segment, 11 for the narrow one). The receiver
// collects NPKT packets, adds the returned credits to its counters and puts
// the payload into the FIFO of its class. Each side may send a payload of a
// class only while it holds a credit for it; the receiving FIFO of each
// class has exactly CREDITS entries, so it can never overflow. Credits come
// back piggy-backed on traffic in the other direction or, in any idle slot
// where no payload can go (also when one waits without a credit; otherwise
// two starved sides could wait on each other forever), in a credit-only frame.
// Separate classes keep responses from being blocked
// behind requests. raw_i forwards to the channel allocator (calibration).
// Credit-based flow control and segmentation into packets follow the paper;
// the frame layout and the credit return policy are this design's choice.
module d2d_data_link
  import occamy_pkg::*;
#(
  parameter int unsigned PL_W    = 657,
  parameter int unsigned PKT_W   = 608,
  parameter int unsigned CREDITS = 4,
  localparam int unsigned CRB    = $clog2(CREDITS + 1) + 1,
  localparam int unsigned FR_W   = PL_W + 2 + 2 * CRB,
  localparam int unsigned NPKT   = (FR_W + PKT_W - 1) / PKT_W
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // from the protocol layer: one payload with its class (0 request, 1 response)
  input  logic             tx_valid_i,
  input  logic             tx_cls_i,
  input  logic [PL_W-1:0]  tx_pl_i,
  output logic             tx_ready_o,
  // which classes the sender may send now (credit available)
  output logic [1:0]       tx_can_o,
  // to the protocol layer, one FIFO per class
  output logic [1:0]       rx_valid_o,
  output logic [1:0][PL_W-1:0] rx_pl_o,
  input  logic [1:0]       rx_ready_i,
  // to / from the channel allocator
  output logic             pkt_valid_o,
  output logic [PKT_W-1:0] pkt_o,
  input  logic             pkt_ready_i,
  input  logic             pkt_valid_i,
  input  logic [PKT_W-1:0] pkt_i,
  // status
  output logic [1:0][CRB-1:0] credits_o
);
  localparam int unsigned PB = (NPKT > 1) ? $clog2(NPKT) : 1;
  localparam int unsigned FB = NPKT * PKT_W;

  // ---------------- transmit ----------------
  logic [1:0][CRB-1:0] cred_q, ret_q;
  logic                busy_q;
  logic [PB-1:0]       tx_idx_q, rx_idx_q;
  logic [FB-1:0]       tx_frame_q, rx_frame_q;
  logic [1:0]          ret_inc;
  logic [1:0][CRB-1:0] got;
  logic                rx_done;
  logic                start_pl, start_cr;
  pl_type_e            rx_type;

  assign tx_can_o[0] = cred_q[0] != 0;
  assign tx_can_o[1] = cred_q[1] != 0;
  assign tx_ready_o  = !busy_q && tx_can_o[tx_cls_i];
  assign start_pl    = tx_valid_i && tx_ready_o;
  assign start_cr    = !busy_q && !start_pl && (ret_q != '0);

  assign pkt_valid_o = busy_q;
  assign pkt_o       = tx_frame_q[PKT_W*tx_idx_q +: PKT_W];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q     <= 1'b0;
      tx_idx_q   <= '0;
      tx_frame_q <= '0;
      for (int c = 0; c < 2; c++) begin
        cred_q[c] <= CRB'(CREDITS);
        ret_q[c]  <= '0;
      end
    end else begin
      logic [1:0][CRB-1:0] ret_n, cred_n;
      ret_n  = ret_q;
      cred_n = cred_q;
      for (int c = 0; c < 2; c++) begin
        if (ret_inc[c]) ret_n[c] = ret_n[c] + 1'b1;
        if (rx_done) cred_n[c] = cred_n[c] + got[c];
      end
      if (start_pl || start_cr) begin
        pl_type_e t;
        t = start_cr ? PL_CREDIT : (tx_cls_i ? PL_RSP : PL_REQ);
        tx_frame_q <= FB'({(start_pl ? tx_pl_i : PL_W'(0)), 2'(t), ret_q[1], ret_q[0]});
        for (int c = 0; c < 2; c++) ret_n[c] = ret_n[c] - ret_q[c];
        if (start_pl) cred_n[tx_cls_i] = cred_n[tx_cls_i] - 1'b1;
        busy_q   <= 1'b1;
        tx_idx_q <= '0;
      end else if (busy_q && pkt_ready_i) begin
        if (tx_idx_q == PB'(NPKT - 1)) busy_q <= 1'b0;
        else tx_idx_q <= tx_idx_q + 1'b1;
      end
      ret_q  <= ret_n;
      cred_q <= cred_n;
    end
  end

  // ---------------- receive ----------------
  logic [FB-1:0] rx_full;
  always_comb begin
    rx_full = rx_frame_q;
    rx_full[PKT_W*rx_idx_q +: PKT_W] = pkt_i;
  end
  assign rx_done = pkt_valid_i && (rx_idx_q == PB'(NPKT - 1));
  assign got[0]  = rx_full[CRB-1:0];
  assign got[1]  = rx_full[2*CRB-1:CRB];
  assign rx_type = pl_type_e'(rx_full[2*CRB +: 2]);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_idx_q   <= '0;
      rx_frame_q <= '0;
    end else if (pkt_valid_i) begin
      rx_frame_q <= rx_full;
      rx_idx_q   <= rx_done ? '0 : rx_idx_q + 1'b1;
    end
  end

  for (genvar c = 0; c < 2; c++) begin : g_cls
    logic rdy;  // always set: the sender holds a credit for every entry
    logic [$clog2(CREDITS+1)-1:0] cnt;  // occupancy, unused
    sync_fifo #(.WIDTH(PL_W), .DEPTH(CREDITS)) i_fifo (
      .clk_i, .rst_ni, .flush_i(1'b0),
      .push_i(rx_done && rx_type == (c == 0 ? PL_REQ : PL_RSP)),
      .data_i(rx_full[2*CRB+2 +: PL_W]), .ready_o(rdy),
      .pop_i(rx_ready_i[c] && rx_valid_o[c]), .data_o(rx_pl_o[c]),
      .valid_o(rx_valid_o[c]), .count_o(cnt));
    assign ret_inc[c] = rx_ready_i[c] && rx_valid_o[c];
  end

  assign credits_o = cred_q;

  overflow_check : assert property (@(posedge clk_i) disable iff (!rst_ni)
    rx_done && rx_type == PL_REQ |-> g_cls[0].rdy);
endmodule
