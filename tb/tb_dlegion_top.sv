// tb_dlegion_top: end-to-end test of the whole accelerator at reduced size
// (L = 4 Legions, C = 2 cores, D = 4). A sequence of attention-stage commands
// (Q projection over two rounds, K/V projection, attention score, attention x V,
// output projection) runs through the orchestrator; the driver (tb_dl_driver)
// feeds tiles over the NoC, reads every result back and compares it with the
// exact product, and fails if any mechanism (stall, skipped window, partial
// window, zero fill, multicast, unicast, read-out, projection and dense mode,
// multi-round command, multi-window accumulation) never happened.
module tb_dlegion_top;
  import dlegion_pkg::*;
  localparam int L = 4, C = 2, D = 4, DEPTH = 512, AW = 9, ZTB_DEPTH = 64, ZAW = 6;
  logic clk = 0;
  logic rst_n, cmd_valid, cmd_ready, round_done, round_ack, cmd_done, f_valid, f_ready;
  layer_cmd_t cmd; logic [DIM_W-1:0] round;
  workload_t [L-1:0] asg_wl;
  logic [L-1:0][DIM_W-1:0] asg_unit, asg_kv_group, asg_n_off;
  logic [L-1:0] asg_active, legion_busy, ztb_we, f_mask, ps_valid, ev_stall, ev_skip, ev_partial, ev_zfill;
  logic [ZAW-1:0] ztb_waddr; logic [C-1:0] ztb_wdata;
  logic [$clog2(C):0] f_core; link_e f_link; logic [C-1:0][D-1:0][7:0] f_payload;
  logic [L-1:0][D-1:0][ELEM_W-1:0] ps_data;

  always #5 clk = ~clk;
  dlegion_top #(.L(L), .C(C), .D(D), .DEPTH(DEPTH), .ZTB_DEPTH(ZTB_DEPTH)) dut (.*);
  tb_dl_driver #(.L(L), .C(C), .D(D), .AW(AW), .ZAW(ZAW)) drv (.*);

  initial begin
    #3000000;
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    drv.do_cmd(STG_Q_PROJ,   8, 24, 40, 6, 6, 1, 10);
    drv.do_cmd(STG_KV_PROJ,  8, 24, 8, 4, 1, 2, 0);
    drv.do_cmd(STG_SCORE,   10, 24, 16, 2, 1, 2, 0);
    drv.do_cmd(STG_ATT_HEAD, 8, 24, 8, 1, 1, 2, 5);
    drv.do_cmd(STG_OUT_PROJ, 6, 40, 8, 4, 4, 2, 0);
    drv.finish_mech();
  end
endmodule
