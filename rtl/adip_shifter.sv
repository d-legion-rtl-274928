// adip_shifter: shared shifter at the foot of one ADiP column.
//
// The four psum lanes leaving the bottom PE of a column hold, per weight digit g,
// the column sum of x * wdigit(g). This block shifts and adds them according to
// the precision mode:
//   MODE_DENSE : y = L0 + L1<<2 + L2<<4 + L3<<6 as a 32-bit value, placed
//                in lanes 1:0 (lane 0 low half, lane 1 high half); lanes 3:2 = 0
//   MODE_PROJ4 : lane 0 = L0 + L1<<2, lane 1 = L2 + L3<<2; lanes 3:2 = 0
//   MODE_PROJ2 : lane g = Lg (four independent 8b x 2b results)
// Purely combinational. The existence of shared shifters in an ADiP core is from
// the paper; the lane packing is this design's choice.
module adip_shifter
  import dlegion_pkg::*;
(
  input  mode_e                        mode,
  input  logic [NACC-1:0][LANE_W-1:0]  lanes_in,
  output logic [NACC-1:0][LANE_W-1:0]  lanes_out
);

  logic signed [31:0] l32 [NACC];
  logic signed [31:0] dense;

  always_comb begin
    for (int g = 0; g < NACC; g++) l32[g] = 32'(signed'(lanes_in[g]));
    dense = l32[0] + (l32[1] <<< 2) + (l32[2] <<< 4) + (l32[3] <<< 6);
    lanes_out = '0;
    case (mode)
      MODE_DENSE: begin
        lanes_out[0] = dense[15:0];
        lanes_out[1] = dense[31:16];
      end
      MODE_PROJ4: begin
        lanes_out[0] = lanes_in[0] + (lanes_in[1] << 2);
        lanes_out[1] = lanes_in[2] + (lanes_in[3] << 2);
      end
      default: lanes_out = lanes_in;
    endcase
  end

endmodule
