// Index comparator joining the index streams of SU0 and SU1.
//
// Both SUs show their head index (idx*_i, with valid and end flags). In
// each cycle in which both SUs can take an action, the comparator decides:
//   intersection: equal indices -> both fetch their value and the index is
//                 a joint index; otherwise the smaller index is skipped.
//                 Once one stream has ended, the other is drained by skips.
//   union:        equal -> both fetch; otherwise the SU with the smaller
//                 index fetches and the other streams a zero. Once one
//                 stream has ended, the other fetches and its partner
//                 streams zeros.
// Joint indices are queued (two entries) for SU2, which can write them out
// as the index array of a sparse result; jcount_o counts them, and done_o
// rises once both streams are finished. With mode CMP_OFF nothing happens.
//
// Intersection, union and the joint-index path to SU2 follow the paper's
// figure of the three SUs; the exact action encoding is this design's.
module su_index_cmp import occamy_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  cmp_mode_e   mode_i,
  input  logic        start_i,
  input  logic        idx0_valid_i,
  input  logic [31:0] idx0_i,
  input  logic        idx0_end_i,
  input  logic        idx1_valid_i,
  input  logic [31:0] idx1_i,
  input  logic        idx1_end_i,
  output su_act_e     act0_o,
  input  logic        act0_ready_i,
  output su_act_e     act1_o,
  input  logic        act1_ready_i,
  input  logic        jidx_en_i,
  output logic        jidx_valid_o,
  output logic [31:0] jidx_o,
  input  logic        jidx_ready_i,
  output logic [31:0] jcount_o,
  output logic        done_o
);
  cmp_mode_e   mode_q;
  logic        active_q;
  logic [31:0] jcount_q;
  su_act_e     a0, a1;
  logic        emit, fire, jq_ready, finished;
  logic [31:0] jidx_d;
  logic [1:0]  jq_cnt;

  always_comb begin
    a0 = ACT_NONE; a1 = ACT_NONE; emit = 1'b0; jidx_d = '0; finished = 1'b0;
    if (mode_q == CMP_INTER) begin
      if (idx0_valid_i && idx1_valid_i) begin
        if (idx0_i == idx1_i) begin
          a0 = ACT_FETCH; a1 = ACT_FETCH; emit = 1'b1; jidx_d = idx0_i;
        end else if (idx0_i < idx1_i) a0 = ACT_SKIP;
        else                          a1 = ACT_SKIP;
      end else if (idx0_end_i && idx1_valid_i) a1 = ACT_SKIP;
      else if (idx1_end_i && idx0_valid_i)     a0 = ACT_SKIP;
      else if (idx0_end_i && idx1_end_i)       finished = 1'b1;
    end else if (mode_q == CMP_UNION) begin
      if (idx0_valid_i && idx1_valid_i) begin
        emit = 1'b1;
        if (idx0_i == idx1_i) begin
          a0 = ACT_FETCH; a1 = ACT_FETCH; jidx_d = idx0_i;
        end else if (idx0_i < idx1_i) begin
          a0 = ACT_FETCH; a1 = ACT_ZERO; jidx_d = idx0_i;
        end else begin
          a0 = ACT_ZERO; a1 = ACT_FETCH; jidx_d = idx1_i;
        end
      end else if (idx0_end_i && idx1_valid_i) begin
        a0 = ACT_ZERO; a1 = ACT_FETCH; emit = 1'b1; jidx_d = idx1_i;
      end else if (idx1_end_i && idx0_valid_i) begin
        a0 = ACT_FETCH; a1 = ACT_ZERO; emit = 1'b1; jidx_d = idx0_i;
      end else if (idx0_end_i && idx1_end_i) finished = 1'b1;
    end
  end

  assign fire   = active_q && act0_ready_i && act1_ready_i && (jq_ready || !jidx_en_i) &&
                  (a0 != ACT_NONE || a1 != ACT_NONE);
  assign act0_o = fire ? a0 : ACT_NONE;
  assign act1_o = fire ? a1 : ACT_NONE;

  sync_fifo #(.WIDTH(32), .DEPTH(2)) i_jidx_fifo (
    .clk_i, .rst_ni, .flush_i(start_i), .push_i(fire && emit && jidx_en_i), .data_i(jidx_d),
    .ready_o(jq_ready), .pop_i(jidx_ready_i && jidx_valid_o), .data_o(jidx_o),
    .valid_o(jidx_valid_o), .count_o(jq_cnt));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mode_q <= CMP_OFF; active_q <= 1'b0; jcount_q <= '0;
    end else if (start_i) begin
      mode_q <= mode_i; active_q <= (mode_i != CMP_OFF); jcount_q <= '0;
    end else begin
      if (fire && emit) jcount_q <= jcount_q + 1;
      if (active_q && finished) active_q <= 1'b0;
    end
  end

  assign jcount_o = jcount_q;
  assign done_o   = !active_q;
endmodule
