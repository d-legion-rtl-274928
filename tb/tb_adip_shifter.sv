// tb_adip_shifter: self-checking test of the column shifter. Random lane values,
// all three modes; expected values computed with integer shifts and adds.
module tb_adip_shifter;
  import dlegion_pkg::*;
  mode_e mode;
  logic [NACC-1:0][LANE_W-1:0] lanes_in, lanes_out;
  int checks = 0, failures = 0;
  adip_shifter dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int l[4]; longint d; logic [NACC-1:0][LANE_W-1:0] e;
      for (int g = 0; g < 4; g++) begin lanes_in[g] = 16'($urandom); l[g] = int'(signed'(lanes_in[g])); end
      mode = mode_e'($urandom_range(0, 2));
      #1;
      e = '0;
      case (mode)
        MODE_DENSE: begin d = l[0] + l[1]*4 + l[2]*16 + l[3]*64; e[0] = d[15:0]; e[1] = d[31:16]; end
        MODE_PROJ4: begin e[0] = 16'(l[0] + 4*l[1]); e[1] = 16'(l[2] + 4*l[3]); end
        default:    e = lanes_in;
      endcase
      checks++;
      if (lanes_out !== e) begin failures++; if (failures < 5) $display("FAIL mode %0d", mode); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
