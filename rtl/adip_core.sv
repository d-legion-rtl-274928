// adip_core: D x D adaptive-precision systolic array (ADiP) with DiP dataflow.
//
// Weights are stationary. An input row a[0..D-1] enters the top PE row in
// parallel; every cycle each activation moves one row down and one column to the
// right (wrapping from column D-1 to 0), so PE(i,j) sees a[(j-i) mod D] of the row
// that entered i cycles earlier. Psums move straight down. For column j to output
// y[j] = sum_k a[k] W[k][j], PE(i,j) must hold W[(j-i) mod D][j]: each weight
// column is rotated by its column index. This permutation is done offline; the
// core is loaded with the permuted tile, one row per cycle, row-addressed
// (w_row selects the PE row written from w_in). The diagonal movement and the
// weight permutation follow the DiP/ADiP dataflow the paper builds on; the
// rotation direction, the row-addressed load and the exact timing are this
// design's choices.
//
// The shared shifter (adip_shifter) of each column combines the four psum lanes
// by mode and the result is registered in y. A row presented on a_in in the cycle
// en=1 appears on y D+1 enabled cycles later (D array stages plus the output
// register), which matches the time to full utilisation TFU = D of eq. (3) plus
// one output stage. All rows of a tile leave together, no synchronisation FIFOs.
//
// Deactivation (core_on=0): the activations entering the array are forced to zero
// and weight writes are ignored, so the array only flushes zeros and produces
// zero psums; used for structurally zero tiles.
module adip_core
  import dlegion_pkg::*;
#(
  parameter int unsigned D = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                en,        // advance the pipeline
  input  logic                                core_on,   // 0: core deactivated
  input  mode_e                               mode,
  input  logic [D-1:0][7:0]                   a_in,      // activation row
  input  logic                                w_wr,
  input  logic [$clog2(D)-1:0]                w_row,
  input  logic [D-1:0][7:0]                   w_in,      // permuted weight row
  output logic [D-1:0][NACC-1:0][LANE_W-1:0]  y          // per column: four lanes
);

  logic [7:0]                  x_q  [D][D];   // x_out of PE(i,j)
  logic [NACC-1:0][LANE_W-1:0] ps_q [D][D];   // ps_out of PE(i,j)
  logic [D-1:0][NACC-1:0][LANE_W-1:0] foot;

  for (genvar i = 0; i < D; i++) begin : g_row
    for (genvar j = 0; j < D; j++) begin : g_col
      logic [7:0]                  xi;
      logic [NACC-1:0][LANE_W-1:0] pi;
      if (i == 0) begin : g_top
        assign xi = core_on ? a_in[j] : 8'h00;
        assign pi = '0;
      end else begin : g_inner
        assign xi = x_q[i-1][(j+D-1)%D];
        assign pi = ps_q[i-1][j];
      end
      rpe u_pe (
        .clk    (clk),
        .rst_n  (rst_n),
        .en     (en),
        .mode   (mode),
        .x_in   (xi),
        .x_out  (x_q[i][j]),
        .w_wr   (w_wr && core_on && (w_row == i[$clog2(D)-1:0])),
        .w_in   (w_in[j]),
        .ps_in  (pi),
        .ps_out (ps_q[i][j])
      );
    end
  end

  for (genvar j = 0; j < D; j++) begin : g_shift
    adip_shifter u_sh (
      .mode      (mode),
      .lanes_in  (ps_q[D-1][j]),
      .lanes_out (foot[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= foot;
  end

endmodule
