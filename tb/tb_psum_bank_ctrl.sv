// tb_psum_bank_ctrl: self-checking test of the bank controller: bank enables and
// row addresses for random tiles and rows in all three modes.
module tb_psum_bank_ctrl;
  import dlegion_pkg::*;
  localparam int AW = 14;
  mode_e mode; logic [DIM_W-1:0] nt, m, rows; logic [NACC-1:0] bank_en; logic [AW-1:0] addr;
  int checks = 0, failures = 0;
  psum_bank_ctrl #(.AW(AW)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int eb, ea;
      mode = mode_e'($urandom_range(0, 2)); rows = 16 * $urandom_range(1, 8);
      nt = $urandom_range(0, 20); m = $urandom_range(0, rows - 1);
      #1;
      if (mode == MODE_DENSE) begin eb = 1 << (nt % 4); ea = (nt / 4) * rows + m; end
      else begin eb = (mode == MODE_PROJ2) ? 15 : 3; ea = nt * rows + m; end
      checks++;
      if (bank_en !== 4'(eb) || addr !== AW'(ea)) begin
        failures++; if (failures < 5) $display("FAIL mode %0d nt %0d m %0d", mode, nt, m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
