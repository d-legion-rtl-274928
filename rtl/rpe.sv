// rpe: reconfigurable (adaptive-precision) processing element of an ADiP core.
//
// The PE holds one stationary 8-bit weight byte and multiplies the 8-bit signed
// activation passing through it with that byte using sixteen 2-bit multipliers.
// The activation is cut into four 2-bit digits (top digit signed) and the weight
// byte into four 2-bit digits; multiplier (a,g) forms digit(a) x wdigit(g). The
// sixteen multipliers form four groups, one per weight digit g; group g sums its
// four products, shifted by the activation digit position, giving x * wdigit(g),
// and adds it to the incoming psum lane g (the group's internal accumulator).
// How the weight digits are read depends on the mode:
//   MODE_PROJ2  four independent signed 2-bit weights (four interleaved tiles)
//   MODE_PROJ4  two signed 4-bit weights: digits 1 and 3 signed, 0 and 2 unsigned
//   MODE_DENSE  one signed 8-bit weight: only digit 3 signed
// The lanes are recombined by the shared shifter at the foot of each column
// (adip_shifter), so the four lanes travel down the column unshifted.
// Sixteen 2-bit multipliers in four groups with internal accumulators, and a
// one-cycle 8b x 8b product, follow the paper; the digit decomposition, the
// signed/unsigned digit rule and the lane widths are this design's choices.
//
// Timing: x_out and ps_out are registered and update on every clock with en=1.
// The weight byte is written when w_wr=1 (row-addressed load, no shifting).
module rpe
  import dlegion_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,      // advance (pipeline enable)
  input  mode_e                        mode,
  input  logic signed [7:0]            x_in,    // activation from the diagonal neighbour
  output logic signed [7:0]            x_out,   // registered activation, to next row
  input  logic                         w_wr,    // write stationary weight
  input  logic [7:0]                   w_in,
  input  logic [NACC-1:0][LANE_W-1:0]  ps_in,   // psum lanes from the PE above
  output logic [NACC-1:0][LANE_W-1:0]  ps_out   // registered psum lanes, to the PE below
);

  logic [7:0] w_q;

  // 3-bit two's-complement view of a 2-bit digit, signed or unsigned.
  function automatic logic signed [2:0] digit(input logic [1:0] d, input logic sgn);
    return sgn ? {d[1], d} : {1'b0, d};
  endfunction

  // Which weight digits are signed in each mode.
  function automatic logic wsigned(input mode_e md, input int g);
    case (md)
      MODE_PROJ2: return 1'b1;
      MODE_PROJ4: return (g % 2) == 1;
      default:    return g == 3;
    endcase
  endfunction

  logic signed [LANE_W-1:0] grp [NACC];

  always_comb begin
    for (int g = 0; g < NACC; g++) begin
      logic signed [LANE_W-1:0] acc;
      acc = '0;
      for (int a = 0; a < 4; a++) begin
        logic signed [5:0] pp;   // one 2-bit x 2-bit multiplier
        pp = digit(x_in[2*a +: 2], a == 3) * digit(w_q[2*g +: 2], wsigned(mode, g));
        acc = acc + (LANE_W'(pp) <<< (2*a));
      end
      grp[g] = acc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q    <= '0;
      x_out  <= '0;
      ps_out <= '0;
    end else begin
      if (w_wr) w_q <= w_in;
      if (en) begin
        x_out <= x_in;
        for (int g = 0; g < NACC; g++) ps_out[g] <= ps_in[g] + grp[g];
      end
    end
  end

endmodule
