// Synchronous FIFO, used as the data FIFO of each stream unit and as a
// buffer throughout the design.
//
// First-word-fall-through: data_o shows the oldest entry while valid_o is
// high. push_i is accepted when ready_o (not full); pop_i when valid_o.
// A push and a pop may happen in the same cycle. A full FIFO accepts a push
// only once a pop has freed a slot in an earlier cycle, which keeps ready_o
// free of combinational paths from pop_i.
// count_o reports the fill level. Depth and width are parameters; the
// default depth of 4 is this design's choice (the paper gives none).
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     flush_i,
  input  logic                     push_i,
  input  logic [WIDTH-1:0]         data_i,
  output logic                     ready_o,
  input  logic                     pop_i,
  output logic [WIDTH-1:0]         data_o,
  output logic                     valid_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [CW-1:0] cnt_q;
  logic do_push, do_pop;

  assign ready_o = (cnt_q != CW'(DEPTH));
  assign valid_o = (cnt_q != '0);
  assign data_o  = mem[rd_q];
  assign count_o = cnt_q;
  assign do_push = push_i && ready_o;
  assign do_pop  = pop_i && valid_o;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else if (flush_i) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= inc(wr_q);
      if (do_pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem[wr_q] <= data_i;
  end

  // a pop of an empty FIFO is a protocol error of the user
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> valid_o)
    else $error("sync_fifo: pop while empty");
endmodule
