// Shared integer multiply-divide unit of a cluster (RV32M operations).
//
// N_CORES cores request through req_valid_i; a round-robin arbiter picks
// one when the unit is idle. Multiplications finish in one cycle after
// acceptance. Divisions and remainders run a radix-2 restoring divider,
// one quotient bit per cycle (32 cycles). The result goes back to the
// requesting core with rsp_valid_o[core] for one cycle. Division by zero
// and signed overflow give the RISC-V defined results.
//
// The paper only names the shared unit; its insides here (sharing by
// round-robin, iterative divider) are this design's choice.
module muldiv import occamy_pkg::*; #(
  parameter int unsigned N_CORES = 9
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [N_CORES-1:0] req_valid_i,
  input  md_op_e             req_op_i  [N_CORES],
  input  logic [31:0]        req_a_i   [N_CORES],
  input  logic [31:0]        req_b_i   [N_CORES],
  output logic [N_CORES-1:0] req_ready_o,
  output logic [N_CORES-1:0] rsp_valid_o,
  output logic [31:0]        rsp_data_o
);
  localparam int unsigned CB = (N_CORES > 1) ? $clog2(N_CORES) : 1;
  typedef enum logic [1:0] { S_IDLE, S_MUL, S_DIV, S_DONE } state_e;
  state_e state_q;
  logic [CB-1:0] rr_q, sel, owner_q;
  logic          any;
  md_op_e        op_q;
  logic [31:0]   a_q, b_q, res_q;
  logic [31:0]   quo_q, rem_q, dvd_q, dvs_q;
  logic [5:0]    cnt_q;
  logic          neg_q, rneg_q;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 0; k < N_CORES; k++) begin
      int unsigned c;
      c = (int'(rr_q) + k) % N_CORES;
      if (!any && req_valid_i[c]) begin
        any = 1'b1;
        sel = CB'(c);
      end
    end
    req_ready_o = '0;
    if (state_q == S_IDLE && any) req_ready_o[sel] = 1'b1;
  end

  // multiplication (all four variants) from one 66-bit signed product
  logic signed [32:0] ma, mb;
  logic signed [65:0] prod;
  always_comb begin
    ma = (op_q == MD_MULHU) ? {1'b0, a_q} : {a_q[31], a_q};
    mb = (op_q == MD_MULHU || op_q == MD_MULHSU) ? {1'b0, b_q} : {b_q[31], b_q};
    prod = ma * mb;
  end

  logic [32:0] sub;
  assign sub = {rem_q[30:0], dvd_q[31]} - {1'b0, dvs_q};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; rr_q <= '0; owner_q <= '0; op_q <= MD_MUL;
      a_q <= '0; b_q <= '0; res_q <= '0; quo_q <= '0; rem_q <= '0;
      dvd_q <= '0; dvs_q <= '0; cnt_q <= '0; neg_q <= 1'b0; rneg_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (any) begin
          owner_q <= sel;
          rr_q    <= (int'(sel) == N_CORES - 1) ? '0 : sel + 1'b1;
          op_q    <= req_op_i[sel];
          a_q     <= req_a_i[sel];
          b_q     <= req_b_i[sel];
          if (req_op_i[sel] inside {MD_DIV, MD_DIVU, MD_REM, MD_REMU}) begin
            logic sgn;
            sgn    = req_op_i[sel] inside {MD_DIV, MD_REM};
            dvd_q  <= (sgn && req_a_i[sel][31]) ? -req_a_i[sel] : req_a_i[sel];
            dvs_q  <= (sgn && req_b_i[sel][31]) ? -req_b_i[sel] : req_b_i[sel];
            neg_q  <= sgn && (req_a_i[sel][31] ^ req_b_i[sel][31]) && (req_b_i[sel] != 0);
            rneg_q <= sgn && req_a_i[sel][31];
            rem_q  <= '0;
            quo_q  <= '0;
            cnt_q  <= 6'd32;
            state_q <= S_DIV;
          end else begin
            state_q <= S_MUL;
          end
        end
        S_MUL: begin
          res_q   <= (op_q == MD_MUL) ? prod[31:0] : prod[63:32];
          state_q <= S_DONE;
        end
        S_DIV: begin
          if (cnt_q != 0) begin
            if (!sub[32]) begin
              rem_q <= sub[31:0];
              quo_q <= {quo_q[30:0], 1'b1};
            end else begin
              rem_q <= {rem_q[30:0], dvd_q[31]};
              quo_q <= {quo_q[30:0], 1'b0};
            end
            dvd_q <= {dvd_q[30:0], 1'b0};
            cnt_q <= cnt_q - 1;
          end else begin
            if (op_q inside {MD_DIV, MD_DIVU})
              res_q <= (b_q == 0) ? 32'hffff_ffff : (neg_q ? -quo_q : quo_q);
            else
              res_q <= (b_q == 0) ? a_q : (rneg_q ? -rem_q : rem_q);
            state_q <= S_DONE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    rsp_valid_o = '0;
    if (state_q == S_DONE) rsp_valid_o[owner_q] = 1'b1;
  end
  assign rsp_data_o = res_q;
endmodule
