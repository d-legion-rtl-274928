// tb_dlegion_noc: self-checking test of the NoC distribution: unicast and
// multicast masks, all-or-nothing delivery (accepted only when every addressed
// Legion is ready), and empty masks.
module tb_dlegion_noc;
  localparam int L = 8;
  logic in_valid, in_ready; logic [L-1:0] in_mask, out_valid, out_ready;
  int checks = 0, failures = 0;
  dlegion_noc #(.L(L)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic er;
      in_valid = $urandom_range(0, 1);
      in_mask = ($urandom_range(0, 1)) ? L'(1 << $urandom_range(0, L-1)) : L'($urandom);
      out_ready = ($urandom_range(0, 3) == 0) ? L'($urandom) : '1;
      #1;
      er = 1; for (int l = 0; l < L; l++) if (in_mask[l] && !out_ready[l]) er = 0;
      checks += 2;
      if (in_ready !== er) failures++;
      if (out_valid !== ((in_valid && er) ? in_mask : '0)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
