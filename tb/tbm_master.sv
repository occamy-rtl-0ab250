// Random-traffic bus master for testbenches. It issues one access at a
// time (reads and byte-masked writes) inside [base_i, base_i + SPAN) on the
// single-beat request/response bus, keeps a reference copy of everything it
// wrote, and checks each read answer against it together with the answer's
// id and err flag. Several masters can share a memory when their windows do
// not overlap. Written as clocked logic so it never races the design.
module tbm_master #(
  parameter type req_t = occamy_pkg::narrow_req_t,
  parameter type rsp_t = occamy_pkg::narrow_rsp_t,
  parameter int unsigned DW   = 64,
  parameter int unsigned SPAN = 4096,
  parameter logic [31:0] ID   = 32'h5,
  parameter int unsigned PCT  = 50        // chance in percent of a new access per idle cycle
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic [47:0] base_i,
  output req_t        req_o,
  input  rsp_t        rsp_i,
  output int          checks_o,
  output int          failures_o,
  output int          done_o,
  output int          lat_max_o
);
  localparam int unsigned NB = DW / 8;
  logic [DW-1:0] mem [longint unsigned];
  longint unsigned keys [$];
  typedef enum logic [1:0] { IDLE, WAIT_Q, WAIT_P } st_e;
  st_e st;
  logic [DW-1:0] exp_q;
  logic          is_read_q;
  int            t_issue, cyc;

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      req_o <= '0; st <= IDLE; checks_o <= 0; failures_o <= 0; done_o <= 0;
      lat_max_o <= 0; cyc <= 0; exp_q <= '0; is_read_q <= 1'b0; t_issue <= 0;
    end else begin
      cyc <= cyc + 1;
      case (st)
        IDLE: if (en_i && ($urandom % 100) < PCT) begin
          longint unsigned w;
          logic [DW-1:0] d, m;
          logic [NB-1:0] s;
          bit rd;
          rd = (keys.size() != 0) && ($urandom % 2 == 0);
          if (rd) w = keys[$urandom % keys.size()];
          else    w = (longint'(base_i) + longint'(($urandom % (SPAN / NB)) * NB)) / NB;
          for (int i = 0; i < DW / 32; i++) d[32*i +: 32] = $urandom;
          s = mem.exists(w) ? NB'({$urandom, $urandom}) : '1;
          req_o <= '0;
          req_o.q_valid <= 1'b1;
          req_o.q.addr  <= 48'(w * NB);
          req_o.q.write <= !rd;
          req_o.q.wdata <= d;
          req_o.q.strb  <= s;
          req_o.q.id    <= ID;
          req_o.p_ready <= 1'b1;
          if (rd) exp_q <= mem[w];
          else begin
            for (int b = 0; b < NB; b++) m[8*b +: 8] = {8{s[b]}};
            if (!mem.exists(w)) begin mem[w] = d; keys.push_back(w); end
            else mem[w] = (mem[w] & ~m) | (d & m);
          end
          is_read_q <= rd;
          t_issue   <= cyc;
          st <= WAIT_Q;
        end
        WAIT_Q: if (rsp_i.q_ready) begin
          req_o.q_valid <= 1'b0;
          st <= WAIT_P;
          if (rsp_i.p_valid) st <= IDLE;  // cannot answer in the accepting cycle; keep simple
        end
        default: ;
      endcase
      if (st == WAIT_P && rsp_i.p_valid) begin
        checks_o <= checks_o + 1;
        if (rsp_i.p.id != ID || rsp_i.p.err || (is_read_q && rsp_i.p.rdata != exp_q)) begin
          failures_o <= failures_o + 1;
          $display("%m: answer id %h err %0d data %h exp %h", rsp_i.p.id, rsp_i.p.err,
                   rsp_i.p.rdata, exp_q);
        end
        if (cyc - t_issue > lat_max_o) lat_max_o <= cyc - t_issue;
        done_o <= done_o + 1;
        st <= IDLE;
      end
    end
  end
endmodule
