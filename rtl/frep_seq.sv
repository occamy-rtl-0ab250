// FREP sequencer: the hardware loop between a worker core and its FPU.
//
// The core offloads floating-point instructions through in_*. Normally
// they pass straight to the FPU (out_*). An FREP command (in_is_frep_i)
// carries a repetition count R and a body length N: the next N offloaded
// instructions are forwarded and captured in a loop buffer, then replayed
// from the buffer R-1 more times while the core is free to continue with
// integer work; offload stalls (in_ready_o low) until the replay ends. The
// command itself is not forwarded. R of 0 or 1 runs the body once.
// One instruction leaves per cycle when out_ready_i is high, so a body of N
// instructions repeated R times occupies the FPU port for N*R cycles.
//
// Example from the paper: "frep %len, 1; fmadd.d" issues len FMAs.
// The buffer depth of 16 and this exact command format are this design's
// choices; the paper states the function.
module frep_seq #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned IW    = 32
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          in_valid_i,
  input  logic [IW-1:0] in_instr_i,
  input  logic          in_is_frep_i,
  input  logic [31:0]   in_reps_i,
  input  logic [$clog2(DEPTH+1)-1:0] in_n_i,
  output logic          in_ready_o,
  output logic          out_valid_o,
  output logic [IW-1:0] out_instr_o,
  input  logic          out_ready_i,
  output logic          looping_o
);
  localparam int unsigned NW = $clog2(DEPTH + 1);
  typedef enum logic [1:0] { S_IDLE, S_CAPTURE, S_REPLAY } state_e;
  state_e state_q;
  logic [IW-1:0] buf_q [DEPTH];
  logic [NW-1:0] n_q, pos_q;
  logic [31:0]   rep_q;   // iterations still to replay

  always_comb begin
    in_ready_o  = 1'b0;
    out_valid_o = 1'b0;
    out_instr_o = in_instr_i;
    unique case (state_q)
      S_IDLE: begin
        out_valid_o = in_valid_i && !in_is_frep_i;
        in_ready_o  = in_is_frep_i ? 1'b1 : out_ready_i;
      end
      S_CAPTURE: begin
        out_valid_o = in_valid_i && !in_is_frep_i;
        in_ready_o  = !in_is_frep_i && out_ready_i;
      end
      default: begin
        out_valid_o = 1'b1;
        out_instr_o = buf_q[pos_q[$clog2(DEPTH)-1:0]];
      end
    endcase
  end

  assign looping_o = (state_q != S_IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      n_q     <= '0;
      pos_q   <= '0;
      rep_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (in_valid_i && in_is_frep_i && in_n_i != 0) begin
          state_q <= S_CAPTURE;
          n_q     <= (in_n_i > NW'(DEPTH)) ? NW'(DEPTH) : in_n_i;
          rep_q   <= (in_reps_i > 1) ? in_reps_i - 1 : 32'd0;
          pos_q   <= '0;
        end
        S_CAPTURE: if (in_valid_i && in_ready_o) begin
          if (pos_q + 1'b1 == n_q) begin
            pos_q   <= '0;
            state_q <= (rep_q != 0) ? S_REPLAY : S_IDLE;
          end else begin
            pos_q <= pos_q + 1'b1;
          end
        end
        default: if (out_ready_i) begin
          if (pos_q + 1'b1 == n_q) begin
            pos_q <= '0;
            rep_q <= rep_q - 1;
            if (rep_q == 1) state_q <= S_IDLE;
          end else begin
            pos_q <= pos_q + 1'b1;
          end
        end
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (state_q == S_CAPTURE && in_valid_i && in_ready_o)
      buf_q[pos_q[$clog2(DEPTH)-1:0]] <= in_instr_i;
  end
endmodule
