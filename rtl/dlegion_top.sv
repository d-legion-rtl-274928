// dlegion_top: the D-Legion accelerator.
//
// L Legions (default 8), each with C = 8 ADiP cores of D x D = 16 x 16
// reconfigurable PEs (16,384 PEs, 262,144 2-bit multipliers in all), fed by one
// NoC and driven by the global orchestrator. The host gives an attention-stage
// command (layer_cmd_t); the orchestrator assigns each Legion a workload per
// round, the Legions run independently, and after each round the host reads the
// psum memories out through LINK_PSUM flits and acknowledges the round.
//
// Off-chip memory (HBM3 in the paper) is not part of this RTL: the tile stream
// that memory would deliver enters as NoC flits on the f_* port (1024-bit payload
// per cycle = the 1024-bit per-Legion interface of the paper, with a Legion mask
// for unicast/multicast), and the orchestrator's per-Legion assignment (wl, unit,
// kv_group, n_off, active) is brought out so that the tile feeder knows which
// tiles to send. The zero-tile books are written through ztb_*.
// Structure and sizes are the paper's; the port protocol is this design's.
module dlegion_top
  import dlegion_pkg::*;
#(
  parameter int unsigned L         = 8,
  parameter int unsigned C         = 8,
  parameter int unsigned D         = 16,
  parameter int unsigned DEPTH     = 10813,
  parameter int unsigned ZTB_DEPTH = 256,
  parameter int unsigned AW        = $clog2(DEPTH),
  parameter int unsigned ZAW       = $clog2(ZTB_DEPTH)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // attention-stage command
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  layer_cmd_t                     cmd,
  output logic                           round_done,
  input  logic                           round_ack,
  output logic [DIM_W-1:0]               round,
  output logic                           cmd_done,
  // per-Legion assignment of the current round
  output workload_t [L-1:0]              asg_wl,
  output logic [L-1:0][DIM_W-1:0]        asg_unit,
  output logic [L-1:0][DIM_W-1:0]        asg_kv_group,
  output logic [L-1:0][DIM_W-1:0]        asg_n_off,
  output logic [L-1:0]                   asg_active,
  output logic [L-1:0]                   legion_busy,
  // zero-tile books
  input  logic [L-1:0]                   ztb_we,
  input  logic [ZAW-1:0]                 ztb_waddr,
  input  logic [C-1:0]                   ztb_wdata,
  // NoC input (tile flits)
  input  logic                           f_valid,
  output logic                           f_ready,
  input  logic [L-1:0]                   f_mask,
  input  logic [$clog2(C):0]             f_core,
  input  link_e                          f_link,
  input  logic [C-1:0][D-1:0][7:0]       f_payload,
  // psum read-out, one port per Legion
  output logic [L-1:0]                   ps_valid,
  output logic [L-1:0][D-1:0][ELEM_W-1:0] ps_data,
  // events per Legion (stall cycle, skipped window, partial window, zero fill)
  output logic [L-1:0]                   ev_stall,
  output logic [L-1:0]                   ev_skip,
  output logic [L-1:0]                   ev_partial,
  output logic [L-1:0]                   ev_zfill
);

  logic [L-1:0] start, done, l_valid, l_ready;
  workload_t [L-1:0] wl;

  dlegion_orchestrator #(.L(L)) u_orch (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .start, .wl, .unit (asg_unit), .kv_group (asg_kv_group), .n_off (asg_n_off),
    .active (asg_active), .legion_done (done), .round_done, .round_ack, .round,
    .cmd_done
  );
  assign asg_wl = wl;

  dlegion_noc #(.L(L)) u_noc (
    .in_valid (f_valid), .in_ready (f_ready), .in_mask (f_mask),
    .out_valid (l_valid), .out_ready (l_ready)
  );

  for (genvar l = 0; l < L; l++) begin : g_legion
    legion #(.D(D), .C(C), .DEPTH(DEPTH), .ZTB_DEPTH(ZTB_DEPTH), .AW(AW), .ZAW(ZAW)) u_legion (
      .clk, .rst_n,
      .start     (start[l]),
      .wl        (wl[l]),
      .busy      (legion_busy[l]),
      .done      (done[l]),
      .ztb_we    (ztb_we[l]),
      .ztb_waddr (ztb_waddr),
      .ztb_wdata (ztb_wdata),
      .f_valid   (l_valid[l]),
      .f_ready   (l_ready[l]),
      .f_core    (f_core),
      .f_link    (f_link),
      .f_payload (f_payload),
      .ps_valid  (ps_valid[l]),
      .ps_data   (ps_data[l]),
      .ev_stall  (ev_stall[l]),
      .ev_skip   (ev_skip[l]),
      .ev_partial(ev_partial[l]),
      .ev_zfill  (ev_zfill[l])
    );
  end

endmodule
