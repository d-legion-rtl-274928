// tb_legion_accumulator: self-checking test of one Legion accumulator and of a
// tied pair. Independent 16-bit lane sums are checked modulo 2^16; for the pair,
// 32-bit core psums are split into halves, fed to two instances chained by the
// carry, and the joined result is compared with the 32-bit sum.
module tb_legion_accumulator;
  import dlegion_pkg::*;
  localparam int D = 16, C = 8;
  logic [C-1:0][D-1:0][LANE_W-1:0] lo_in, hi_in;
  logic [D-1:0][LANE_W-1:0] lo_ps, hi_ps, lo_sum, hi_sum;
  logic [D-1:0][3:0] cy, cy_hi;
  int checks = 0, failures = 0;

  legion_accumulator #(.D(D), .C(C)) u_lo (.core_in(lo_in), .psum_in(lo_ps), .chain_in(1'b0),
    .carry_in('0), .sum(lo_sum), .carry_out(cy));
  legion_accumulator #(.D(D), .C(C)) u_hi (.core_in(hi_in), .psum_in(hi_ps), .chain_in(1'b1),
    .carry_in(cy), .sum(hi_sum), .carry_out(cy_hi));

  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 500; t++) begin
      logic [31:0] v [C][D]; logic [31:0] p [D];
      for (int j = 0; j < D; j++) begin
        p[j] = $urandom; lo_ps[j] = p[j][15:0]; hi_ps[j] = p[j][31:16];
        for (int c = 0; c < C; c++) begin
          v[c][j] = $urandom; lo_in[c][j] = v[c][j][15:0]; hi_in[c][j] = v[c][j][31:16];
        end
      end
      #1;
      for (int j = 0; j < D; j++) begin
        logic [31:0] s; logic [15:0] s16;
        s = p[j]; s16 = p[j][15:0];
        for (int c = 0; c < C; c++) begin s += v[c][j]; s16 += v[c][j][15:0]; end
        checks += 2;
        if (lo_sum[j] !== s16) failures++;
        if ({hi_sum[j], lo_sum[j]} !== s) begin
          failures++; if (failures < 5) $display("FAIL lane %0d got %h exp %h", j, {hi_sum[j], lo_sum[j]}, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
