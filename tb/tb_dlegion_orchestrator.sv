// tb_dlegion_orchestrator: self-checking test of the orchestrator. For every
// stage (MHA and GQA sizes) it checks, round by round, which Legions start and
// the (M, K, N, mode), unit, kv_group and N offset each gets, computed here from
// the mapping rules; Legions report done after random delays, and the number of
// rounds and the round handshake are checked.
module tb_dlegion_orchestrator;
  import dlegion_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, round_done, round_ack = 0, cmd_done;
  layer_cmd_t cmd;
  logic [L-1:0] start, active, legion_done = '0;
  workload_t [L-1:0] wl;
  logic [L-1:0][DIM_W-1:0] unit, kv_group, n_off;
  logic [DIM_W-1:0] round;
  int checks = 0, failures = 0;
  dlegion_orchestrator #(.L(L)) dut (.*);
  always #5 clk = ~clk;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic run(stage_e s, int seq, int hid, int hd, int h, int kvh);
    int units, rounds, nr, ntot, nper, u, dl [L];
    units = (s == STG_Q_PROJ) ? h : (s == STG_KV_PROJ) ? 2*kvh : h;
    rounds = (s == STG_Q_PROJ || s == STG_KV_PROJ) ? (units + L - 1) / L : (s == STG_OUT_PROJ) ? 1 : h;
    @(negedge clk); cmd = '{stage: s, seq: 16'(seq), hidden: 16'(hid), head_dim: 16'(hd), heads: 16'(h), kv_heads: 16'(kvh)};
    cmd_valid = 1; @(negedge clk); cmd_valid = 0;
    nr = 0;
    forever begin
      int cyc;
      while (start == 0 && !cmd_done) @(negedge clk);
      if (cmd_done) break;
      nr++;
      for (int l = 0; l < L; l++) begin
        bit ea; workload_t ew; int eu, eg, eo;
        if (s == STG_Q_PROJ || s == STG_KV_PROJ) begin
          u = (nr - 1) * L + l; ea = u < units;
          ew = '{m: 16'(seq), k: 16'(hid), n: 16'(hd), mode: MODE_PROJ2};
          eu = u; eo = 0;
          eg = (s == STG_Q_PROJ) ? u / (h / kvh) : (u < kvh ? u : u - kvh);
        end else begin
          ntot = (s == STG_SCORE) ? seq : (s == STG_ATT_HEAD) ? hd : hid;
          nper = (ntot + L - 1) / L; eo = l * nper; ea = eo < ntot;
          ew = '{m: 16'(seq), k: 16'((s == STG_SCORE) ? hd : (s == STG_ATT_HEAD) ? seq : hid),
                 n: 16'((ntot - eo < nper) ? ntot - eo : nper),
                 mode: (s == STG_OUT_PROJ) ? MODE_PROJ2 : MODE_DENSE};
          eu = (s == STG_OUT_PROJ) ? 0 : nr - 1; eg = (s == STG_OUT_PROJ) ? 0 : (nr - 1) / (h / kvh);
        end
        chk(start[l] == ea, "start");
        if (ea) begin
          chk(wl[l] == ew, $sformatf("wl stage %0d legion %0d", s, l));
          chk(unit[l] == 16'(eu) && kv_group[l] == 16'(eg) && n_off[l] == 16'(eo), $sformatf("unit/group/off stage %0d legion %0d", s, l));
        end
        dl[l] = ea ? $urandom_range(1, 30) : -1;
      end
      cyc = 0;
      while (!round_done) begin
        @(negedge clk); cyc++;
        legion_done = '0;
        for (int l = 0; l < L; l++) if (dl[l] == cyc) legion_done[l] = 1;
        if (cyc > 40) break;
      end
      legion_done = '0;
      chk(round_done, "round_done");
      repeat ($urandom_range(0, 5)) begin @(negedge clk); chk(round_done && start == 0, "waits for ack"); end
      round_ack = 1; @(negedge clk); round_ack = 0;
    end
    chk(nr == rounds, $sformatf("rounds %0d exp %0d", nr, rounds));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int st = 0; st < 5; st++) begin
      run(stage_e'(st), 64, 2560, 128, 20, 20);   // MHA, 20 heads (not a multiple of L)
      run(stage_e'(st), 64, 2560, 128, 20, 5);    // GQA, 4 heads per KV head
      run(stage_e'(st), 60, 300, 36, 4, 1);       // MQA, uneven N split
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
