// Affine address generator of a stream unit: up to four nested loops.
//
// After start_i it emits bound[0]+1 x ... x bound[dims]+1 addresses,
// one per accepted handshake (valid_o & ready_i). Loop level 0 is the
// innermost. Each level keeps the address at which its current iteration
// began; stepping level d adds stride[d] to it and restarts every inner
// level there, so no multiplier is needed and strides are plain byte
// distances between neighbouring elements of that level. last_o marks the
// final address. A new start_i aborts a running sequence.
//
// The four loop levels follow the paper ("up to 4D strided accesses"); the
// register layout and the absolute-stride encoding are this design's own.
module su_addrgen #(
  parameter int unsigned DIMS = 4,
  parameter int unsigned AW   = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     start_i,
  input  logic [AW-1:0]            base_i,
  input  logic [DIMS-1:0][31:0]    bound_i,
  input  logic [DIMS-1:0][AW-1:0]  stride_i,
  input  logic [$clog2(DIMS)-1:0]  dims_i,
  output logic                     valid_o,
  input  logic                     ready_i,
  output logic [AW-1:0]            addr_o,
  output logic                     last_o
);
  logic                   active_q;
  logic [DIMS-1:0][31:0]  cnt_q, bound_q;
  logic [DIMS-1:0][AW-1:0] ptr_q, stride_q;
  logic [$clog2(DIMS)-1:0] dims_q;

  // level that steps next: lowest level whose counter is below its bound
  logic [DIMS-1:0] can_step;
  int unsigned     step_lvl;
  logic            any_step;

  always_comb begin
    any_step = 1'b0;
    step_lvl = 0;
    for (int d = 0; d < DIMS; d++) begin
      can_step[d] = (d <= int'(dims_q)) && (cnt_q[d] != bound_q[d]);
      if (can_step[d] && !any_step) begin
        any_step = 1'b1;
        step_lvl = d;
      end
    end
  end

  assign valid_o = active_q;
  assign addr_o  = ptr_q[0];
  assign last_o  = active_q && !any_step;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0;
      cnt_q    <= '0;
      bound_q  <= '0;
      ptr_q    <= '0;
      stride_q <= '0;
      dims_q   <= '0;
    end else if (start_i) begin
      active_q <= 1'b1;
      cnt_q    <= '0;
      bound_q  <= bound_i;
      stride_q <= stride_i;
      dims_q   <= dims_i;
      for (int d = 0; d < DIMS; d++) ptr_q[d] <= base_i;
    end else if (valid_o && ready_i) begin
      if (!any_step) begin
        active_q <= 1'b0;
      end else begin
        for (int d = 0; d < DIMS; d++) begin
          if (d == int'(step_lvl)) begin
            cnt_q[d] <= cnt_q[d] + 1;
            ptr_q[d] <= ptr_q[d] + stride_q[d];
          end else if (d < int'(step_lvl)) begin
            cnt_q[d] <= '0;
            ptr_q[d] <= ptr_q[step_lvl] + stride_q[step_lvl];
          end
        end
      end
    end
  end
endmodule
