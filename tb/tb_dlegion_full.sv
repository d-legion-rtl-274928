// tb_dlegion_full: one complete operation of the accelerator at its full size
// (8 Legions x 8 cores x 16 x 16 PEs, 0.66 MiB psum banks), top parameters left
// at their defaults. A Q-projection command for eight heads (sequence 16, hidden
// size 128, head size 64, 8b x 2b) runs as one round in which every Legion
// computes one head; weights are sent unicast, the shared activation rows
// multicast to all eight Legions, and every result is read back and compared
// with the exact product. Without stalls the Legion busy time must match the paper's latency model.
module tb_dlegion_full;
  import dlegion_pkg::*;
  localparam int L = 8, C = 8, D = 16, AW = 14, ZAW = 8;
  logic clk = 0;
  logic rst_n, cmd_valid, cmd_ready, round_done, round_ack, cmd_done, f_valid, f_ready;
  layer_cmd_t cmd; logic [DIM_W-1:0] round;
  workload_t [L-1:0] asg_wl;
  logic [L-1:0][DIM_W-1:0] asg_unit, asg_kv_group, asg_n_off;
  logic [L-1:0] asg_active, legion_busy, ztb_we, f_mask, ps_valid, ev_stall, ev_skip, ev_partial, ev_zfill;
  logic [ZAW-1:0] ztb_waddr; logic [C-1:0] ztb_wdata;
  logic [$clog2(C):0] f_core; link_e f_link; logic [C-1:0][D-1:0][7:0] f_payload;
  logic [L-1:0][D-1:0][ELEM_W-1:0] ps_data;
  int busy0 = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (legion_busy[0]) busy0++;
  dlegion_top dut (.*);
  tb_dl_driver #(.L(L), .C(C), .D(D), .AW(AW), .ZAW(ZAW)) drv (.*);

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
  initial begin
    int exp_busy;
    repeat (2) @(negedge clk); rst_n = 1;
    drv.do_cmd(STG_Q_PROJ, 16, 128, 64, 8, 8, 0, 0);
    // Legion 0 runs MT = KT = NT = 1: the latency model gives 1*1*(16*(1+1)+1)+16 = 49,
    // plus the cycles it waits for its weights while Legions 0..7 get theirs
    // one after the other and for the shared activation multicast (7 x 16 cycles),
    // plus one cycle: the feeder places its first weight beat one cycle after the
    // round's assignment has started the Legion.
    exp_busy = 49 + 7 * 16 + 1;
    drv.chk(busy0 == exp_busy, $sformatf("legion 0 busy %0d exp %0d", busy0, exp_busy));
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures);
    $finish;
  end
endmodule
