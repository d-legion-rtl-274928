// tb_noc_gateway: self-checking test of the NoC gateway: LINK_ID steering,
// CORE_ID all-cores and unicast payload slicing, readiness per link and the
// decoding of a psum read-out request.
module tb_noc_gateway;
  import dlegion_pkg::*;
  localparam int D = 16, C = 8, AW = 14;
  logic f_valid, f_ready, w_valid, w_ready, a_valid, a_ready, rd_ready, rd_req;
  logic [$clog2(C):0] f_core; link_e f_link;
  logic [C-1:0][D-1:0][7:0] f_payload, core_data;
  logic [C-1:0] core_sel; logic [1:0] rd_bank; logic [AW-1:0] rd_addr;
  int checks = 0, failures = 0;
  noc_gateway #(.D(D), .C(C), .AW(AW)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic er; logic [C-1:0] es;
      f_valid = $urandom_range(0, 1); f_core = ($urandom_range(0, 1)) ? C : $urandom_range(0, C-1);
      f_link = link_e'($urandom_range(0, 2));
      w_ready = $urandom_range(0, 1); a_ready = $urandom_range(0, 1); rd_ready = $urandom_range(0, 1);
      for (int c = 0; c < C; c++) f_payload[c] = {$urandom, $urandom, $urandom, $urandom};
      #1;
      er = (f_link == LINK_WEIGHT) ? w_ready : (f_link == LINK_ACT) ? a_ready : rd_ready;
      checks += 5;
      if (f_ready !== er) failures++;
      if (w_valid !== (f_valid && f_link == LINK_WEIGHT)) failures++;
      if (a_valid !== (f_valid && f_link == LINK_ACT)) failures++;
      if (rd_req !== (f_valid && f_link == LINK_PSUM && rd_ready)) failures++;
      if ({rd_bank, rd_addr} !== 16'(f_payload[0])) failures++;
      es = (f_core == C) ? '1 : C'(1 << f_core);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (core_sel[c] !== es[c]) failures++;
        else if (es[c] && core_data[c] !== ((f_core == C) ? f_payload[c] : f_payload[0])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
