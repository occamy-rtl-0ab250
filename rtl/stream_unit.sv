// Stream unit (SU): turns a register of the FPU into a buffered stream of
// scratchpad accesses, generating the addresses in hardware.
//
// Modes, chosen by cfg_i when start_i is pulsed:
//  * affine read / write: a 4D strided pattern from su_addrgen. Reads fill
//    the data FIFO, which the FPU pops through reg_r*; values the FPU pushes
//    through reg_w* are written out in order.
//  * indirect read (INDIRECT=1, cfg.indir): the SU first fetches the index
//    array (8-, 16- or 32-bit indices packed into double words, starting at
//    idx_base, idx_len entries), then reads the 8-byte element
//    base + 8*index for each index.
//  * comparator-steered indirect read (ext_ctrl_i): the head index is shown
//    to the index comparator on idx_o, and the comparator's action decides
//    whether it is fetched (ACT_FETCH), dropped (ACT_SKIP), or whether a
//    zero is streamed instead without consuming it (ACT_ZERO).
//  * index write-out (INOUT=1, cfg.indir with cfg.write): values from the FPU
//    go to base, base+8, ... and every joint index arriving on jidx_* is
//    written to the index array at idx_base with the configured index size.
//
// One 64-bit TCDM port is shared by index writes (first), index-array
// fetches, and element accesses (last). The TCDM answers exactly one cycle
// after a grant, so a single pending-kind register steers each answer to
// the index buffer or the data FIFO. Element reads are only issued while
// the data FIFO has room for them, so the FIFO never overflows.
//
// The three modes, the index widths and the FIFO between memory and FPU
// follow the paper. FIFO depth, port priorities and the configuration
// layout are this design's choices.
module stream_unit import occamy_pkg::*; #(
  parameter bit          INDIRECT   = 1'b1,
  parameter bit          INOUT      = 1'b0,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  su_cfg_t     cfg_i,
  input  logic        start_i,
  input  logic        ext_ctrl_i,
  output logic        busy_o,
  // FPU register side
  output logic        reg_rvalid_o,
  output logic [63:0] reg_rdata_o,
  input  logic        reg_rready_i,
  input  logic        reg_wvalid_i,
  input  logic [63:0] reg_wdata_i,
  output logic        reg_wready_o,
  // index comparator side
  output logic        idx_valid_o,
  output logic [31:0] idx_o,
  output logic        idx_end_o,
  input  su_act_e     act_i,
  output logic        act_ready_o,
  input  logic        jidx_valid_i,
  input  logic [31:0] jidx_i,
  output logic        jidx_ready_o,
  // memory side
  output tcdm_req_t   tcdm_req_o,
  input  tcdm_rsp_t   tcdm_rsp_i
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  // ---------------- configuration latched at start ----------------
  logic        write_q, indir_q, ext_q, idxwr_q;
  idx_size_e   isz_q;
  logic [31:0] base_q, idx_len_q, jptr_q, wptr_q;

  // ---------------- affine address generator ----------------
  logic        ag_valid, ag_ready, ag_last;
  logic [31:0] ag_addr;
  logic        ag_start;
  assign ag_start = start_i && !(cfg_i.indir && (INDIRECT || INOUT));

  su_addrgen #(.DIMS(4), .AW(32)) i_addrgen (
    .clk_i, .rst_ni, .start_i(ag_start), .base_i(cfg_i.base), .bound_i(cfg_i.bound),
    .stride_i(cfg_i.stride), .dims_i(cfg_i.dims), .valid_o(ag_valid), .ready_i(ag_ready),
    .addr_o(ag_addr), .last_o(ag_last));

  // ---------------- index array fetch and unpacking ----------------
  logic [31:0] iw_addr_q, iw_left_q, emitted_q;
  logic [1:0]  iw_out_q;            // index words requested but not yet returned
  logic [2:0]  pos_q;               // index position within the head word
  logic        iw_valid, iw_pop, iw_push, iw_ready;
  logic [63:0] iw_data;
  logic [1:0]  iw_cnt;
  logic        hv_q;                // head index register
  logic [31:0] h_q;
  logic        h_pop, h_load;
  logic [3:0]  per_word;
  logic [31:0] unpacked;

  assign per_word = 4'd8 >> isz_q;

  sync_fifo #(.WIDTH(64), .DEPTH(2)) i_idx_fifo (
    .clk_i, .rst_ni, .flush_i(start_i), .push_i(iw_push), .data_i(tcdm_rsp_i.rdata),
    .ready_o(iw_ready), .pop_i(iw_pop), .data_o(iw_data), .valid_o(iw_valid), .count_o(iw_cnt));

  always_comb begin
    unique case (isz_q)
      IDX_8:   unpacked = 32'(iw_data[pos_q*8 +: 8]);
      IDX_16:  unpacked = 32'(iw_data[pos_q[1:0]*16 +: 16]);
      default: unpacked = iw_data[pos_q[0]*32 +: 32];
    endcase
  end

  assign h_load = iw_valid && (emitted_q != idx_len_q) && (!hv_q || h_pop);
  assign iw_pop = h_load && ((32'(pos_q) + 1 == 32'(per_word)) || (emitted_q + 1 == idx_len_q));

  assign idx_valid_o = hv_q;
  assign idx_o       = h_q;
  assign idx_end_o   = indir_q && !hv_q && (emitted_q == idx_len_q);

  // ---------------- element request queue ----------------
  typedef struct packed { logic [31:0] addr; logic zero; } rq_t;
  rq_t  rq_in, rq_head;
  logic rq_push, rq_ready, rq_valid, rq_pop;
  logic [1:0] rq_cnt;

  sync_fifo #(.WIDTH($bits(rq_t)), .DEPTH(2)) i_req_fifo (
    .clk_i, .rst_ni, .flush_i(start_i), .push_i(rq_push), .data_i(rq_in),
    .ready_o(rq_ready), .pop_i(rq_pop), .data_o(rq_head), .valid_o(rq_valid), .count_o(rq_cnt));

  always_comb begin
    rq_push  = 1'b0;
    rq_in    = '{addr: ag_addr, zero: 1'b0};
    ag_ready = 1'b0;
    h_pop    = 1'b0;
    act_ready_o = 1'b0;
    if (INOUT && idxwr_q) begin
      // value addresses of a sparse result: consecutive double words
      rq_in   = '{addr: wptr_q, zero: 1'b0};
      rq_push = reg_wvalid_i && reg_wready_o;
    end else if (!indir_q) begin
      rq_push  = ag_valid;
      ag_ready = rq_ready;
    end else if (!ext_q) begin
      rq_in   = '{addr: base_q + (h_q << 3), zero: 1'b0};
      rq_push = hv_q;
      h_pop   = hv_q && rq_ready;
    end else begin
      act_ready_o = rq_ready;
      unique case (act_i)
        ACT_FETCH: begin
          rq_in   = '{addr: base_q + (h_q << 3), zero: 1'b0};
          rq_push = hv_q;
          h_pop   = hv_q && rq_ready;
        end
        ACT_SKIP:  h_pop = hv_q;
        ACT_ZERO:  begin
          rq_in   = '{addr: '0, zero: 1'b1};
          rq_push = 1'b1;
        end
        default: ;
      endcase
    end
  end

  // ---------------- data FIFO between memory and FPU ----------------
  logic        df_push, df_pop, df_valid, df_ready;
  logic [63:0] df_in, df_out;
  logic [CW-1:0] df_cnt;

  sync_fifo #(.WIDTH(64), .DEPTH(FIFO_DEPTH)) i_data_fifo (
    .clk_i, .rst_ni, .flush_i(start_i), .push_i(df_push), .data_i(df_in),
    .ready_o(df_ready), .pop_i(df_pop), .data_o(df_out), .valid_o(df_valid), .count_o(df_cnt));

  // ---------------- port arbitration ----------------
  typedef enum logic [1:0] { PK_NONE, PK_IDX, PK_DATA, PK_ZERO } pend_e;
  pend_e pend_q, pend_d;
  logic  data_room;
  logic  do_jidx, do_iw, do_rq;
  logic [31:0] jaddr;

  // one pending answer at most, counted against the FIFO space
  assign data_room = (32'(df_cnt) + ((pend_q == PK_DATA || pend_q == PK_ZERO) ? 1 : 0)) < FIFO_DEPTH;
  assign jaddr     = jptr_q;

  always_comb begin
    tcdm_req_o   = '0;
    pend_d       = PK_NONE;
    do_jidx      = 1'b0;
    do_iw        = 1'b0;
    do_rq        = 1'b0;
    rq_pop       = 1'b0;
    jidx_ready_o = 1'b0;
    if (INOUT && idxwr_q && jidx_valid_i) begin
      tcdm_req_o.req   = 1'b1;
      tcdm_req_o.we    = 1'b1;
      tcdm_req_o.addr  = {jaddr[31:3], 3'b000};
      tcdm_req_o.wdata = 64'(jidx_i) << (8 * jaddr[2:0]);
      unique case (isz_q)
        IDX_8:   tcdm_req_o.be = 8'h01 << jaddr[2:0];
        IDX_16:  tcdm_req_o.be = 8'h03 << jaddr[2:0];
        default: tcdm_req_o.be = 8'h0f << jaddr[2:0];
      endcase
      do_jidx      = tcdm_rsp_i.gnt;
      jidx_ready_o = tcdm_rsp_i.gnt;
    end else if (INDIRECT && indir_q && iw_left_q != 0 &&
                 (32'(iw_cnt) + 32'(iw_out_q)) < 2) begin
      tcdm_req_o.req  = 1'b1;
      tcdm_req_o.addr = {iw_addr_q[31:3], 3'b000};
      do_iw  = tcdm_rsp_i.gnt;
      pend_d = tcdm_rsp_i.gnt ? PK_IDX : PK_NONE;
    end else if (rq_valid) begin
      if (write_q) begin
        if (df_valid) begin
          tcdm_req_o.req   = 1'b1;
          tcdm_req_o.we    = 1'b1;
          tcdm_req_o.addr  = rq_head.addr;
          tcdm_req_o.wdata = df_out;
          tcdm_req_o.be    = 8'hff;
          rq_pop = tcdm_rsp_i.gnt;
        end
      end else if (data_room) begin
        if (rq_head.zero) begin
          rq_pop = 1'b1;
          pend_d = PK_ZERO;
        end else begin
          tcdm_req_o.req  = 1'b1;
          tcdm_req_o.addr = rq_head.addr;
          rq_pop = tcdm_rsp_i.gnt;
          pend_d = tcdm_rsp_i.gnt ? PK_DATA : PK_NONE;
        end
      end
      do_rq = rq_pop;
    end
  end

  assign iw_push = (pend_q == PK_IDX) && tcdm_rsp_i.rvalid;

  always_comb begin
    if (write_q) begin
      df_push = reg_wvalid_i && reg_wready_o;
      df_in   = reg_wdata_i;
      df_pop  = do_rq;
    end else begin
      df_push = (pend_q == PK_ZERO) || ((pend_q == PK_DATA) && tcdm_rsp_i.rvalid);
      df_in   = (pend_q == PK_ZERO) ? 64'h0 : tcdm_rsp_i.rdata;
      df_pop  = reg_rready_i && df_valid;
    end
  end

  assign reg_rvalid_o = !write_q && df_valid;
  assign reg_rdata_o  = df_out;
  // with index write-out, a value needs room both in the FIFO and the queue
  assign reg_wready_o = write_q && df_ready && (!(INOUT && idxwr_q) || rq_ready);

  assign busy_o = ag_valid || rq_valid || (pend_q != PK_NONE) || (write_q && df_valid) ||
                  (indir_q && !idx_end_o);

  // ---------------- state ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      write_q <= 1'b0; indir_q <= 1'b0; ext_q <= 1'b0; idxwr_q <= 1'b0;
      isz_q <= IDX_32; base_q <= '0; idx_len_q <= '0; jptr_q <= '0; wptr_q <= '0;
      iw_addr_q <= '0; iw_left_q <= '0; iw_out_q <= '0; emitted_q <= '0;
      pos_q <= '0; hv_q <= 1'b0; h_q <= '0; pend_q <= PK_NONE;
    end else if (start_i) begin
      write_q   <= cfg_i.write;
      indir_q   <= cfg_i.indir && INDIRECT && !cfg_i.write;
      idxwr_q   <= cfg_i.indir && INOUT && cfg_i.write;
      ext_q     <= ext_ctrl_i;
      isz_q     <= cfg_i.idx_size;
      base_q    <= cfg_i.base;
      idx_len_q <= (cfg_i.indir && INDIRECT && !cfg_i.write) ? cfg_i.idx_len : '0;
      jptr_q    <= cfg_i.idx_base;
      wptr_q    <= cfg_i.base;
      iw_addr_q <= cfg_i.idx_base;
      // double words to fetch: (first position + length) / indices per word, rounded up
      iw_left_q <= (cfg_i.indir && INDIRECT && !cfg_i.write) ?
                   ((32'(cfg_i.idx_base[2:0] >> cfg_i.idx_size) + cfg_i.idx_len
                     + (32'd8 >> cfg_i.idx_size) - 1) >> (3 - cfg_i.idx_size)) : '0;
      iw_out_q  <= '0;
      emitted_q <= '0;
      pos_q     <= cfg_i.idx_base[2:0] >> cfg_i.idx_size;
      hv_q      <= 1'b0;
      pend_q    <= PK_NONE;
    end else begin
      pend_q <= pend_d;
      if (do_iw) begin
        iw_addr_q <= {iw_addr_q[31:3], 3'b000} + 32'd8;
        iw_left_q <= iw_left_q - 1;
      end
      iw_out_q <= iw_out_q + (do_iw ? 2'd1 : 2'd0) - (iw_push ? 2'd1 : 2'd0);
      if (h_load) begin
        hv_q      <= 1'b1;
        h_q       <= unpacked;
        emitted_q <= emitted_q + 1;
        pos_q     <= iw_pop ? 3'd0 : pos_q + 3'd1;
      end else if (h_pop) begin
        hv_q <= 1'b0;
      end
      if (do_jidx) jptr_q <= jptr_q + (32'd1 << isz_q);
      if (rq_push && rq_ready && INOUT && idxwr_q) wptr_q <= wptr_q + 32'd8;
    end
  end

  // an accepted element request must find the port answer where expected
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (pend_q == PK_DATA || pend_q == PK_IDX) |-> tcdm_rsp_i.rvalid)
    else $error("stream_unit: TCDM answer missing");
endmodule
