// tb_rpe: self-checking test of the reconfigurable PE.
// Random activations, weight bytes, modes and incoming psums; the expected lane g
// is ps_in[g] + x * (weight digit g), where the digit is signed or unsigned as the
// mode prescribes (worked out here with plain integer arithmetic). Also checks
// that the activation is forwarded with one cycle delay and that en=0 holds state.
module tb_rpe;
  import dlegion_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, w_wr = 0;
  mode_e mode;
  logic signed [7:0] x_in, x_out;
  logic [7:0] w_in;
  logic [NACC-1:0][LANE_W-1:0] ps_in, ps_out, hold;
  int checks = 0, failures = 0;

  rpe dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int wdig(logic [7:0] w, int g, mode_e md);
    int v; logic sgn;
    v = int'(w[2*g +: 2]);
    sgn = (md == MODE_PROJ2) || (md == MODE_PROJ4 && g % 2 == 1) || (md == MODE_DENSE && g == 3);
    if (sgn && v >= 2) v -= 4;
    return v;
  endfunction

  initial begin
    mode = MODE_DENSE; x_in = 0; w_in = 0; ps_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      logic [7:0] w; int exp_l;
      w = 8'($urandom); mode = mode_e'($urandom_range(0, 2));
      @(negedge clk); w_wr = 1; w_in = w; en = 0;
      @(negedge clk); w_wr = 0; en = 1;
      x_in = 8'($urandom);
      for (int g = 0; g < NACC; g++) ps_in[g] = 16'($urandom_range(0, 4000));
      @(negedge clk); en = 0;
      for (int g = 0; g < NACC; g++) begin
        exp_l = int'(signed'(ps_in[g])) + int'(x_in) * wdig(w, g, mode);
        checks++;
        if (ps_out[g] !== 16'(exp_l)) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d mode %0d x=%0d w=%h got %0d exp %0d", g, mode, x_in, w, signed'(ps_out[g]), exp_l);
        end
      end
      checks++; if (x_out !== x_in) failures++;
      hold = ps_out; x_in = 8'($urandom);
      @(negedge clk);
      checks++; if (ps_out !== hold) failures++;   // en = 0 holds
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
