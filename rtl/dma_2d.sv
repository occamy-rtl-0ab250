// 512-bit DMA engine for one- and two-dimensional transfers, used in every
// cluster (driven by the DMA control core) and once at chiplet level
// (driven by the host).
//
// A command moves reps rows of len bytes from src to dst; row r starts at
// src + r*src_stride and dst + r*dst_stride. Each 64-byte beat is read
// through the read port and written through the write port. Reads run
// ahead of writes, as many as the BUF_DEPTH-entry data buffer can hold,
// so up to BUF_DEPTH reads are in flight and a beat can move every cycle.
// Read answers must return in request order (one source region per row,
// as the crossbars preserve order per master and slave). The command is
// done when every write has been acknowledged; done_count_o then
// increments, which is how software waits for a transfer (its id). One
// command runs at a time; a new one is accepted while idle.
//
// Width (512 bit, 64 B per cycle) and the <=2D transfers follow the paper.
// This engine requires 64-byte aligned addresses, strides and lengths, a
// simplification of the silicon engine, which handles any alignment.
module dma_2d import occamy_pkg::*; #(
  parameter int unsigned BUF_DEPTH = 8
) (
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      cmd_valid_i,
  input  dma_cmd_t  cmd_i,
  output logic      cmd_ready_o,
  output logic      busy_o,
  output logic [31:0] done_count_o,
  output wide_req_t rd_req_o,
  input  wide_rsp_t rd_rsp_i,
  output wide_req_t wr_req_o,
  input  wide_rsp_t wr_rsp_i,
  output logic      beat_o        // a beat was written (for counters)
);
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);
  dma_cmd_t cmd_q;
  logic     busy_q;
  // read side
  logic [31:0]  rd_row_q, rd_ofs_q;
  logic [AW-1:0] rd_base_q;
  logic         rd_left;
  logic [CW:0]  rd_out_q;         // reads in flight
  // write side
  logic [31:0]  wr_row_q, wr_ofs_q;
  logic [AW-1:0] wr_base_q;
  logic         wr_left;
  logic [31:0]  wr_pend_q;        // writes not yet acknowledged
  logic [31:0]  total_q, acked_q; // beats in this command
  logic [31:0]  done_q;
  // buffer
  logic         buf_valid, buf_ready;
  logic [WIDE_DW-1:0] buf_data;
  logic [CW-1:0] buf_cnt;
  logic         rd_fire, wr_fire;

  assign rd_left = busy_q && (rd_row_q != cmd_q.reps);
  assign wr_left = busy_q && (wr_row_q != cmd_q.reps);

  always_comb begin
    rd_req_o = '0;
    rd_req_o.q_valid = rd_left && ((32'(buf_cnt) + 32'(rd_out_q)) < BUF_DEPTH);
    rd_req_o.q.addr  = rd_base_q + AW'(rd_ofs_q);
    rd_req_o.q.write = 1'b0;
    rd_req_o.p_ready = 1'b1;
    wr_req_o = '0;
    wr_req_o.q_valid = wr_left && buf_valid;
    wr_req_o.q.addr  = wr_base_q + AW'(wr_ofs_q);
    wr_req_o.q.write = 1'b1;
    wr_req_o.q.wdata = buf_data;
    wr_req_o.q.strb  = '1;
    wr_req_o.p_ready = 1'b1;
  end

  assign rd_fire = rd_req_o.q_valid && rd_rsp_i.q_ready;
  assign wr_fire = wr_req_o.q_valid && wr_rsp_i.q_ready;
  assign beat_o  = wr_fire;

  sync_fifo #(.WIDTH(WIDE_DW), .DEPTH(BUF_DEPTH)) i_buf (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(rd_rsp_i.p_valid), .data_i(rd_rsp_i.p.rdata),
    .ready_o(buf_ready), .pop_i(wr_fire), .data_o(buf_data), .valid_o(buf_valid),
    .count_o(buf_cnt));

  assign cmd_ready_o  = !busy_q;
  assign busy_o       = busy_q;
  assign done_count_o = done_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cmd_q <= '0; busy_q <= 1'b0; done_q <= '0;
      rd_row_q <= '0; rd_ofs_q <= '0; rd_base_q <= '0; rd_out_q <= '0;
      wr_row_q <= '0; wr_ofs_q <= '0; wr_base_q <= '0; wr_pend_q <= '0;
      total_q <= '0; acked_q <= '0;
    end else begin
      rd_out_q <= rd_out_q + (CW+1)'(rd_fire) - (CW+1)'(rd_rsp_i.p_valid);
      if (!busy_q) begin
        if (cmd_valid_i) begin
          cmd_q     <= cmd_i;
          cmd_q.reps <= (cmd_i.reps == 0) ? 32'd1 : cmd_i.reps;
          busy_q    <= (cmd_i.len != 0);
          if (cmd_i.len == 0) done_q <= done_q + 1;
          rd_row_q  <= '0; rd_ofs_q <= '0; rd_base_q <= cmd_i.src;
          wr_row_q  <= '0; wr_ofs_q <= '0; wr_base_q <= cmd_i.dst;
          total_q   <= (cmd_i.len >> 6) * ((cmd_i.reps == 0) ? 32'd1 : cmd_i.reps);
          acked_q   <= '0;
        end
      end else begin
        if (rd_fire) begin
          if (rd_ofs_q + 64 >= cmd_q.len) begin
            rd_ofs_q  <= '0;
            rd_row_q  <= rd_row_q + 1;
            rd_base_q <= rd_base_q + cmd_q.src_stride;
          end else begin
            rd_ofs_q <= rd_ofs_q + 64;
          end
        end
        if (wr_fire) begin
          if (wr_ofs_q + 64 >= cmd_q.len) begin
            wr_ofs_q  <= '0;
            wr_row_q  <= wr_row_q + 1;
            wr_base_q <= wr_base_q + cmd_q.dst_stride;
          end else begin
            wr_ofs_q <= wr_ofs_q + 64;
          end
        end
        if (wr_rsp_i.p_valid) begin
          acked_q <= acked_q + 1;
          if (acked_q + 1 == total_q) begin
            busy_q <= 1'b0;
            done_q <= done_q + 1;
          end
        end
      end
    end
  end

  // the buffer always has room: reads are only issued against free entries
  assert property (@(posedge clk_i) disable iff (!rst_ni) rd_rsp_i.p_valid |-> buf_ready)
    else $error("dma_2d: read data buffer overflow");
endmodule
