// legion_accumulator: one of the four parallel element-wise accumulators of a
// Legion.
//
// Each of the D lanes adds, in one cycle, the same-column 16-bit psum of all C
// cores (second-level spatial reduction) and the psum previously stored for that
// row in the psum memory (temporal reduction, read-modify-write). The lane sum is
// formed 20 bits wide: the low 16 bits are the result, the top four bits are a
// carry (C + 2 terms of 16 bits fit for C <= 14). Two accumulators are tied for a
// 32-bit activation-to-activation psum: the accumulator holding the low halves
// passes its carry to the one holding the high halves (chain_in = 1), whose
// result then is the exact high half of the 32-bit sum. Purely combinational; the
// psum bank register is the pipeline stage after it.
// Parallel element-wise adders over the eight cores and the tying of two
// accumulators for 32-bit inputs follow the paper; the 16-bit lane width and the
// carry chaining are this design's reading of that tying.
module legion_accumulator
  import dlegion_pkg::*;
#(
  parameter int unsigned D = 16,
  parameter int unsigned C = 8
) (
  input  logic [C-1:0][D-1:0][LANE_W-1:0]  core_in,   // lane of each core, per column
  input  logic [D-1:0][LANE_W-1:0]         psum_in,   // stored psum (0 on first pass)
  input  logic                             chain_in,  // add carry_in (high half of a pair)
  input  logic [D-1:0][3:0]                carry_in,
  output logic [D-1:0][LANE_W-1:0]         sum,
  output logic [D-1:0][3:0]                carry_out
);

  always_comb begin
    for (int j = 0; j < D; j++) begin
      logic [LANE_W+3:0] t;
      t = {4'b0, psum_in[j]};
      for (int c = 0; c < C; c++) t = t + {4'b0, core_in[c][j]};
      if (chain_in) t = t + {{LANE_W{1'b0}}, carry_in[j]};
      sum[j]       = t[LANE_W-1:0];
      carry_out[j] = t[LANE_W+3:LANE_W];
    end
  end

endmodule
