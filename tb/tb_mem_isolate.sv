// Testbench of mem_isolate: with isolation off every handshake and payload
// passes unchanged; with it on no valid or ready crosses in either direction.
module tb_mem_isolate;
  import occamy_pkg::*;
  logic iso, isolated;
  narrow_req_t sreq, mreq;
  narrow_rsp_t srsp, mrsp;
  int checks = 0, failures = 0;
  mem_isolate #(.req_t(narrow_req_t), .rsp_t(narrow_rsp_t)) dut (.isolate_i(iso),
    .slv_req_i(sreq), .slv_rsp_o(srsp), .mst_req_o(mreq), .mst_rsp_i(mrsp), .isolated_o(isolated));
  initial begin #100000 $display("watchdog"); $fatal(1); end
  initial begin
    for (int n = 0; n < 2000; n++) begin
      iso = n[0] ^ n[3];
      sreq = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      mrsp = {$urandom, $urandom, $urandom, $urandom};
      #1;
      checks++;
      if (!iso && (mreq != sreq || srsp != mrsp)) begin failures++; $display("pass-through differs"); end
      checks++;
      if (iso && (mreq.q_valid || mreq.p_ready || srsp.q_ready || srsp.p_valid || !isolated)) begin
        failures++; $display("handshake leaked while isolated");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
