// tb_dl_driver: host, tile feeder and checker for the top-level testbenches.
//
// Plays the part of the host and of the off-chip memory: it issues attention
// stage commands, writes the zero-tile books, sends the tile flits each Legion
// needs (weights unicast, shared activation rows multicast), reads results back
// with LINK_PSUM flits, compares them with the reference model (tb_dl_pkg) and
// acknowledges each round. It also counts how often each mechanism happened.
// Its ports mirror the ports of dlegion_top (directions reversed).
module tb_dl_driver
  import dlegion_pkg::*;
  import tb_dl_pkg::*;
#(
  parameter int L = 4, C = 2, D = 4, AW = 9, ZAW = 6
) (
  input  logic                           clk,
  output logic                           rst_n,
  output logic                           cmd_valid,
  input  logic                           cmd_ready,
  output layer_cmd_t                     cmd,
  input  logic                           round_done,
  output logic                           round_ack,
  input  logic [DIM_W-1:0]               round,
  input  logic                           cmd_done,
  input  workload_t [L-1:0]              asg_wl,
  input  logic [L-1:0][DIM_W-1:0]        asg_unit,
  input  logic [L-1:0][DIM_W-1:0]        asg_kv_group,
  input  logic [L-1:0][DIM_W-1:0]        asg_n_off,
  input  logic [L-1:0]                   asg_active,
  input  logic [L-1:0]                   legion_busy,
  output logic [L-1:0]                   ztb_we,
  output logic [ZAW-1:0]                 ztb_waddr,
  output logic [C-1:0]                   ztb_wdata,
  output logic                           f_valid,
  input  logic                           f_ready,
  output logic [L-1:0]                   f_mask,
  output logic [$clog2(C):0]             f_core,
  output link_e                          f_link,
  output logic [C-1:0][D-1:0][7:0]       f_payload,
  input  logic [L-1:0]                   ps_valid,
  input  logic [L-1:0][D-1:0][ELEM_W-1:0] ps_data,
  input  logic [L-1:0]                   ev_stall,
  input  logic [L-1:0]                   ev_skip,
  input  logic [L-1:0]                   ev_partial,
  input  logic [L-1:0]                   ev_zfill
);
  int checks = 0, failures = 0, gap_pct = 0;
  int n_stall = 0, n_skip = 0, n_part = 0, n_zf = 0, n_mcast = 0, n_ucast = 0, n_read = 0;
  int n_proj = 0, n_dense = 0, n_multi_round = 0, n_multi_win = 0, n_cycles = 0;
  int zpat [L][];

  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0; round_ack = 0; ztb_we = '0; ztb_waddr = '0; ztb_wdata = '0;
    f_valid = 0; f_mask = '0; f_core = ($clog2(C)+1)'(C); f_link = LINK_WEIGHT; f_payload = '0;
  end

  always @(posedge clk) begin
    n_cycles++;
    n_stall += $countones(ev_stall); n_skip += $countones(ev_skip);
    n_part += $countones(ev_partial); n_zf += $countones(ev_zfill);
    if (f_valid && f_ready && f_link != LINK_PSUM) begin
      if ($countones(f_mask) > 1) n_mcast++; else n_ucast++;
    end
  end

  task automatic chk(bit c, string what);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic send(logic [L-1:0] mask, link_e lk, logic [C-1:0][D-1:0][7:0] pl, int gaps);
    while ($urandom_range(0, 99) < gaps) @(negedge clk);
    f_valid = 1; f_mask = mask; f_link = lk; f_payload = pl; f_core = ($clog2(C)+1)'(C);
    @(posedge clk); while (!f_ready) @(posedge clk);
    @(negedge clk); f_valid = 0;
  endtask

  task automatic do_round(int zkind, int gaps);
    dl_job j [L];
    int first, ntmax, ktn, bank, row, col;
    logic [C-1:0][D-1:0][7:0] pl;
    logic [L-1:0] am;
    first = -1; ntmax = 0; ktn = 0;
    for (int l = 0; l < L; l++) if (asg_active[l]) begin
      workload_t wv;
      wv = asg_wl[l];
      j[l] = new(D, C, int'(wv.m), int'(wv.k), int'(wv.n), int'(wv.mode), AW);
      j[l].fill(0);
      for (int w = 0; w < j[l].zm.size(); w++) j[l].zm[w] = (w < zpat[l].size()) ? zpat[l][w] : 0;
      j[l].apply_zm();
      if (first < 0) first = l; else j[l].a = j[first].a;   // shared input matrix
      if (j[l].ntn > ntmax) ntmax = j[l].ntn;
      ktn = j[l].kt;
      if (wv.mode == MODE_DENSE) n_dense++; else n_proj++;
      if (j[l].kt > 1) n_multi_win++;
    end
    for (int t = 0; t < ntmax; t++)
      for (int kw = 0; kw < ktn; kw++) begin
        am = '0;
        for (int l = 0; l < L; l++)
          if (asg_active[l] && t < j[l].ntn && !j[l].skipped(t, kw)) begin
            am[l] = 1'b1;
            for (int i = 0; i < D; i++) begin
              for (int c = 0; c < C; c++) for (int x = 0; x < D; x++) pl[c][x] = j[l].wbyte(t, kw, c, i, x);
              send(L'(1) << l, LINK_WEIGHT, pl, gaps);
            end
          end
        if (am != 0)
          for (int mm = 0; mm < j[first].mt * D; mm++) begin
            for (int c = 0; c < C; c++) for (int x = 0; x < D; x++) pl[c][x] = j[first].abyte(kw, c, mm, x);
            send(am, LINK_ACT, pl, gaps);
          end
      end
    while (!round_done) @(negedge clk);
    for (int l = 0; l < L; l++) if (asg_active[l])
      for (int mm = 0; mm < j[l].m; mm++)
        for (int nn = 0; nn < j[l].n; nn += D) begin
          j[l].where(mm, nn, bank, row, col);
          pl = '0; pl[0][1:0] = 16'(row | (bank << AW));
          send(L'(1) << l, LINK_PSUM, pl, 0);
          chk(ps_valid[l], "ps_valid");
          n_read++;
          for (int x = 0; x < D && nn + x < j[l].n; x++)
            chk(ps_data[l][x] == j[l].stored(mm, nn + x),
                $sformatf("legion %0d mode %0d m %0d n %0d got %0d exp %0d", l, j[l].md, mm, nn + x,
                          signed'(ps_data[l][x]), signed'(j[l].stored(mm, nn + x))));
        end
    round_ack = 1; @(negedge clk); round_ack = 0;
  endtask

  task automatic do_cmd(stage_e s, int seq, int hid, int hd, int h, int kvh, int zkind, int gaps);
    int nr;
    // zero-tile pattern per Legion, kept for every round of the command
    for (int l = 0; l < L; l++) begin
      zpat[l] = new[1 << ZAW];
      foreach (zpat[l][w]) begin
        zpat[l][w] = 0;
        if (zkind >= 1 && $urandom_range(0, 2) == 0) zpat[l][w] = $urandom_range(1, (1 << C) - 2);
        if (zkind == 2 && $urandom_range(0, 3) == 0) zpat[l][w] = (1 << C) - 1;
      end
      if (zkind == 2) zpat[l][0] = (1 << C) - 1;
      for (int w = 0; w < (1 << ZAW); w++) begin
        @(negedge clk); ztb_we = L'(1) << l; ztb_waddr = ZAW'(w); ztb_wdata = C'(zpat[l][w]);
      end
      @(negedge clk); ztb_we = '0;
    end
    @(negedge clk);
    cmd = '{stage: s, seq: 16'(seq), hidden: 16'(hid), head_dim: 16'(hd), heads: 16'(h), kv_heads: 16'(kvh)};
    cmd_valid = 1; @(negedge clk); cmd_valid = 0;
    nr = 0;
    forever begin
      do_round(zkind, gaps); nr++;
      @(negedge clk);
      if (cmd_ready) break;
    end
    if (nr > 1) n_multi_round++;
  endtask

  task automatic finish_mech();
    $display("mechanisms: stall %0d skip %0d partial %0d zfill %0d multicast %0d unicast %0d readout %0d proj %0d dense %0d multi-round %0d multi-window %0d",
             n_stall, n_skip, n_part, n_zf, n_mcast, n_ucast, n_read, n_proj, n_dense, n_multi_round, n_multi_win);
    chk(n_stall > 0, "no stall"); chk(n_skip > 0, "no skipped window"); chk(n_part > 0, "no partial window");
    chk(n_zf > 0, "no zero fill"); chk(n_mcast > 0, "no multicast"); chk(n_ucast > 0, "no unicast");
    chk(n_read > 0, "no read-out"); chk(n_proj > 0, "no projection mode"); chk(n_dense > 0, "no dense mode");
    chk(n_multi_round > 0, "no multi-round command"); chk(n_multi_win > 0, "no multi-window accumulation");
    $display("cycles: %0d", n_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
