// The three cooperating stream units of one worker core and their index
// comparator, bound to FP registers ft0, ft1 and ft2.
//
// SU0 and SU1 support 4D affine and indirect streams; SU2 supports 4D
// affine streams and writing out joint indices. The comparator joins the
// index streams of SU0 and SU1 (intersection or union) and feeds the joint
// indices to SU2.
//
// Configuration is a small register file written by the core (the
// configuration-write instruction of the silicon), 32-bit words at
// cfg_addr_i = {su[2:0], word[4:0]}:
//   su 0..2, word 0 base, 1-4 bound[0..3], 5-8 stride[0..3], 9 dims,
//     10 idx_base, 11 idx_len, 12 idx_size, 13 flags {indir, write}
//     14 start: launches the stream with the words written so far
//   su 3 (comparator), word 0: {jidx_en, mode[1:0]}; writing it restarts
//     the comparator; SUs launched afterwards obey it while it is active.
//   reads: su 3 word 1 joint-index count, word 2 {cmp_done, su_busy[2:0]}.
// ft*_r* pop values for the FPU, ft*_w* push FPU results.
//
// The SU arrangement follows the paper's figure; the register map is this
// design's own.
module su_complex import occamy_pkg::*; #(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        cfg_we_i,
  input  logic [7:0]  cfg_addr_i,
  input  logic [31:0] cfg_wdata_i,
  output logic [31:0] cfg_rdata_o,
  output logic [2:0]        ft_rvalid_o,
  output logic [2:0][63:0]  ft_rdata_o,
  input  logic [2:0]        ft_rready_i,
  input  logic [2:0]        ft_wvalid_i,
  input  logic [2:0][63:0]  ft_wdata_i,
  output logic [2:0]        ft_wready_o,
  output tcdm_req_t   tcdm_req_o [3],
  input  tcdm_rsp_t   tcdm_rsp_i [3],
  output logic [2:0]  busy_o
);
  su_cfg_t   cfg_q [3];
  logic [2:0] start;
  cmp_mode_e mode_q;
  logic      jidx_en_q, cmp_start;
  logic      ext_ctrl;
  logic [2:0] idx_valid, idx_end, act_ready, jidx_ready;
  logic [31:0] idx [3];
  su_act_e   act [3];
  logic      jidx_valid;
  logic [31:0] jidx, jcount;
  logic      cmp_done;

  logic [2:0] su_sel;
  logic [4:0] word;
  assign su_sel = cfg_addr_i[7:5];
  assign word   = cfg_addr_i[4:0];

  always_comb begin
    start = '0;
    cmp_start = 1'b0;
    if (cfg_we_i && su_sel < 3 && word == 5'd14) start[su_sel[1:0]] = 1'b1;
    if (cfg_we_i && su_sel == 3 && word == 5'd0) cmp_start = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < 3; s++) cfg_q[s] <= '0;
      mode_q    <= CMP_OFF;
      jidx_en_q <= 1'b0;
    end else if (cfg_we_i) begin
      if (su_sel < 3) begin
        unique case (word)
          5'd0:  cfg_q[su_sel[1:0]].base <= cfg_wdata_i;
          5'd1, 5'd2, 5'd3, 5'd4: cfg_q[su_sel[1:0]].bound[word - 5'd1] <= cfg_wdata_i;
          5'd5, 5'd6, 5'd7, 5'd8: cfg_q[su_sel[1:0]].stride[word - 5'd5] <= cfg_wdata_i;
          5'd9:  cfg_q[su_sel[1:0]].dims <= cfg_wdata_i[1:0];
          5'd10: cfg_q[su_sel[1:0]].idx_base <= cfg_wdata_i;
          5'd11: cfg_q[su_sel[1:0]].idx_len <= cfg_wdata_i;
          5'd12: cfg_q[su_sel[1:0]].idx_size <= idx_size_e'(cfg_wdata_i[1:0]);
          5'd13: {cfg_q[su_sel[1:0]].indir, cfg_q[su_sel[1:0]].write} <= cfg_wdata_i[1:0];
          default: ;
        endcase
      end else if (su_sel == 3 && word == 5'd0) begin
        mode_q    <= cmp_mode_e'(cfg_wdata_i[1:0]);
        jidx_en_q <= cfg_wdata_i[2];
      end
    end
  end

  always_comb begin
    cfg_rdata_o = '0;
    if (su_sel == 3 && word == 5'd1) cfg_rdata_o = jcount;
    if (su_sel == 3 && word == 5'd2) cfg_rdata_o = {28'd0, cmp_done, busy_o};
  end

  assign ext_ctrl = (mode_q != CMP_OFF) && !cmp_done;

  // a stream counts as ended for the comparator only once it has been
  // launched after the comparator, so the comparator cannot finish early
  logic [1:0] started_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) started_q <= '0;
    else if (cmp_start) started_q <= '0;
    else started_q <= started_q | start[1:0];
  end

  for (genvar s = 0; s < 3; s++) begin : g_su
    stream_unit #(
      .INDIRECT  (s < 2),
      .INOUT     (s == 2),
      .FIFO_DEPTH(FIFO_DEPTH)
    ) i_su (
      .clk_i, .rst_ni,
      .cfg_i       (cfg_q[s]),
      .start_i     (start[s]),
      .ext_ctrl_i  (s < 2 ? ext_ctrl : 1'b0),
      .busy_o      (busy_o[s]),
      .reg_rvalid_o(ft_rvalid_o[s]),
      .reg_rdata_o (ft_rdata_o[s]),
      .reg_rready_i(ft_rready_i[s]),
      .reg_wvalid_i(ft_wvalid_i[s]),
      .reg_wdata_i (ft_wdata_i[s]),
      .reg_wready_o(ft_wready_o[s]),
      .idx_valid_o (idx_valid[s]),
      .idx_o       (idx[s]),
      .idx_end_o   (idx_end[s]),
      .act_i       (s < 2 ? act[s] : ACT_NONE),
      .act_ready_o (act_ready[s]),
      .jidx_valid_i(s == 2 ? jidx_valid : 1'b0),
      .jidx_i      (jidx),
      .jidx_ready_o(jidx_ready[s]),
      .tcdm_req_o  (tcdm_req_o[s]),
      .tcdm_rsp_i  (tcdm_rsp_i[s])
    );
  end
  assign act[2] = ACT_NONE;

  su_index_cmp i_cmp (
    .clk_i, .rst_ni,
    .mode_i      (cmp_mode_e'(cfg_wdata_i[1:0])),
    .start_i     (cmp_start),
    .idx0_valid_i(idx_valid[0]), .idx0_i(idx[0]), .idx0_end_i(idx_end[0] && started_q[0]),
    .idx1_valid_i(idx_valid[1]), .idx1_i(idx[1]), .idx1_end_i(idx_end[1] && started_q[1]),
    .act0_o(act[0]), .act0_ready_i(act_ready[0]),
    .act1_o(act[1]), .act1_ready_i(act_ready[1]),
    .jidx_en_i   (jidx_en_q),
    .jidx_valid_o(jidx_valid), .jidx_o(jidx), .jidx_ready_i(jidx_ready[2]),
    .jcount_o    (jcount),
    .done_o      (cmp_done)
  );
endmodule
