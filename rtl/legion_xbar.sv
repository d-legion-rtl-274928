// legion_xbar: local crossbar of a Legion.
//
// Three routing stages, all combinational and steered by the precision mode:
//   cores -> accumulators: lane g of every core goes to accumulator g (in
//     MODE_DENSE lanes 0/1 carry the low/high halves of the 32-bit psum, so
//     accumulators 0 and 1 form the tied pair).
//   accumulators -> banks: projection modes write accumulator g, sign-extended to
//     32 bits, into bank g; MODE_DENSE writes the pair {acc1, acc0} into the one
//     active bank (bank_sel).
//   banks -> accumulators (read-back for read-modify-write): projection modes
//     return the low 16 bits of bank g to accumulator g; MODE_DENSE splits the
//     active bank's 32-bit elements over accumulators 0 and 1.
// The crossbar between cores, accumulators and psum memories is named by the
// paper; the routing rules are this design's.
module legion_xbar
  import dlegion_pkg::*;
#(
  parameter int unsigned D = 16,
  parameter int unsigned C = 8
) (
  input  mode_e                                       mode,
  input  logic [NACC-1:0]                             bank_sel,   // active bank(s) of the row
  input  logic [C-1:0][D-1:0][NACC-1:0][LANE_W-1:0]   core_y,
  output logic [NACC-1:0][C-1:0][D-1:0][LANE_W-1:0]   acc_in,
  input  logic [NACC-1:0][D-1:0][LANE_W-1:0]          acc_sum,
  output logic [NACC-1:0][D-1:0][ELEM_W-1:0]          bank_wdata,
  input  logic [NACC-1:0][D-1:0][ELEM_W-1:0]          bank_rdata,
  output logic [NACC-1:0][D-1:0][LANE_W-1:0]          acc_psum
);

  logic [D-1:0][ELEM_W-1:0] dense_rd;

  always_comb begin
    for (int g = 0; g < NACC; g++)
      for (int c = 0; c < C; c++)
        for (int j = 0; j < D; j++)
          acc_in[g][c][j] = core_y[c][j][g];

    dense_rd = '0;
    for (int b = 0; b < NACC; b++)
      if (bank_sel[b]) dense_rd = dense_rd | bank_rdata[b];

    for (int b = 0; b < NACC; b++)
      for (int j = 0; j < D; j++) begin
        if (mode == MODE_DENSE) begin
          bank_wdata[b][j] = {acc_sum[1][j], acc_sum[0][j]};
          acc_psum[b][j]   = (b == 0) ? dense_rd[j][15:0] :
                             (b == 1) ? dense_rd[j][31:16] : '0;
        end else begin
          bank_wdata[b][j] = ELEM_W'(signed'(acc_sum[b][j]));
          acc_psum[b][j]   = bank_rdata[b][j][LANE_W-1:0];
        end
      end
  end

endmodule
