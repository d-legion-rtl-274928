// tb_legion_mapper: self-checking test of the Legion mapper on its own.
// Several workloads in all modes, with and without zero tiles and with random
// stalls on the weight/activation beats. Checked against values computed here
// from eq. (1)/(2): the busy time without stalls or zero tiles equals
// KT*NT*(D*(MT+1)+P)+D; the number of weight beats (D per run window) and
// activation beats (MT*D per run window); skipped, partial and zero-fill events;
// core_on = inverse ZTB mask while streaming; the number of psum writes and of
// first-pass writes (no read) per N-tile.
module tb_legion_mapper;
  import dlegion_pkg::*;
  localparam int D = 16, C = 8, AW = 14, ZAW = 8, P = 1;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  workload_t wl;
  logic [ZAW-1:0] ztb_raddr; logic [C-1:0] ztb_rdata;
  logic w_valid = 0, w_ready, a_valid = 0, a_ready, adv, w_wr;
  logic [C-1:0] core_on; mode_e mode; logic [$clog2(D)-1:0] w_row;
  logic [NACC-1:0] rd_re, wr_we, wr_bank; logic [AW-1:0] rd_addr, wr_addr; logic wr_first;
  logic ev_stall, ev_skip, ev_partial, ev_zfill;
  logic [C-1:0] zt [256];
  int checks = 0, failures = 0;
  int stall_pct = 0;

  legion_mapper #(.D(D), .C(C), .AW(AW), .ZAW(ZAW), .PIPE(P)) dut (.*);
  assign ztb_rdata = zt[ztb_raddr];
  always #5 clk = ~clk;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) begin
    w_valid <= ($urandom_range(0, 99) >= stall_pct);
    a_valid <= ($urandom_range(0, 99) >= stall_pct);
  end

  // counters
  int n_busy, n_w, n_a, n_skip, n_part, n_zf, n_wr, n_first, n_rd, n_badon;
  always @(posedge clk) if (rst_n) begin
    if (busy) n_busy++;
    if (w_wr) n_w++;
    if (a_valid && a_ready) begin n_a++; if (core_on !== ~zt[dut.wptr]) n_badon++; end
    if (ev_skip) n_skip++;
    if (ev_partial) n_part++;
    if (ev_zfill) n_zf++;
    if (|wr_we) begin n_wr++; if (wr_first) n_first++; end
    if (|rd_re) n_rd++;
  end

  task automatic run(int m, int k, int n, mode_e md, int zkind, int stalls);
    int r, mt, kt, ntn, exp_busy, win, e_skip, e_part, e_zf, e_run, e_wr, e_first;
    r = (md == MODE_PROJ2) ? 4 : (md == MODE_PROJ4) ? 2 : 1;
    mt = (m + D - 1) / D; kt = (k + C*D - 1) / (C*D); ntn = (n + r*D - 1) / (r*D);
    e_skip = 0; e_part = 0; e_zf = 0; e_run = 0; e_wr = 0; e_first = 0;
    for (int a = 0; a < 256; a++) zt[a] = '0;
    for (int t = 0; t < ntn; t++) begin
      int ran; ran = 0;
      for (int w = 0; w < kt; w++) begin
        win = t * kt + w;
        if (zkind == 1) zt[win] = C'($urandom) & C'($urandom);                  // partial
        if (zkind == 2) zt[win] = ($urandom_range(0, 2) == 0) ? '1 : C'($urandom_range(0, 3));
        if (zkind == 2 && t == 0) zt[win] = '1;                                  // whole tile zero
        if (&zt[win]) e_skip++;
        else begin e_run++; ran++; if (|zt[win]) e_part++; end
      end
      if (ran == 0) begin e_zf++; e_wr += m; e_first += m; end
      else begin e_wr += ran * m; e_first += m; end
    end
    exp_busy = kt * ntn * (D * (mt + 1) + P) + D;
    n_busy = 0; n_w = 0; n_a = 0; n_skip = 0; n_part = 0; n_zf = 0; n_wr = 0; n_first = 0; n_rd = 0; n_badon = 0;
    stall_pct = stalls;
    @(negedge clk); wl = '{m: 16'(m), k: 16'(k), n: 16'(n), mode: md}; start = 1;
    @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    checks += 8;
    if (zkind == 0 && stalls == 0 && n_busy != exp_busy) begin failures++; $display("FAIL busy %0d exp %0d", n_busy, exp_busy); end
    if (n_w != D * e_run) begin failures++; $display("FAIL wbeats %0d exp %0d", n_w, D*e_run); end
    if (n_a != mt * D * e_run) begin failures++; $display("FAIL abeats %0d exp %0d", n_a, mt*D*e_run); end
    if (n_skip != e_skip || n_part != e_part || n_zf != e_zf) begin failures++; $display("FAIL events %0d/%0d %0d/%0d %0d/%0d", n_skip, e_skip, n_part, e_part, n_zf, e_zf); end
    if (n_wr != e_wr) begin failures++; $display("FAIL writes %0d exp %0d", n_wr, e_wr); end
    if (n_first != e_first) begin failures++; $display("FAIL first %0d exp %0d", n_first, e_first); end
    if (n_rd != e_wr - e_first) begin failures++; $display("FAIL reads %0d exp %0d", n_rd, e_wr - e_first); end
    if (n_badon != 0) begin failures++; $display("FAIL core_on"); end
  endtask

  initial begin
    for (int a = 0; a < 256; a++) zt[a] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(32, 256, 64, MODE_PROJ2, 0, 0);
    run(20, 128, 48, MODE_DENSE, 0, 0);
    run(16, 300, 40, MODE_PROJ4, 0, 0);
    run(48, 512, 128, MODE_PROJ2, 0, 30);
    run(32, 1024, 64, MODE_DENSE, 1, 20);
    run(16, 1024, 64, MODE_PROJ2, 2, 0);
    run(16, 768, 96, MODE_DENSE, 2, 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
