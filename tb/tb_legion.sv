// tb_legion: end-to-end test of one Legion (D = 16, C = 8, small psum banks).
// For each job the reference model (tb_dl_pkg) creates random matrices; the
// testbench writes the zero-tile book, streams weight and activation flits in
// the mapper's N -> K -> M order (skipping fully zero windows, optionally with
// random gaps that stall the Legion), then reads every result row back through
// LINK_PSUM flits and compares each element with the exact product. Without gaps
// or zero tiles the busy time must equal the paper's latency model: KT*NT*(D*(MT+1)+P)+D, P = 1.
module tb_legion;
  import dlegion_pkg::*;
  import tb_dl_pkg::*;
  localparam int D = 16, C = 8, DEPTH = 1024, AW = 10, ZAW = 8;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  workload_t wl;
  logic ztb_we = 0; logic [ZAW-1:0] ztb_waddr = 0; logic [C-1:0] ztb_wdata = 0;
  logic f_valid = 0, f_ready; logic [$clog2(C):0] f_core = C; link_e f_link = LINK_WEIGHT;
  logic [C-1:0][D-1:0][7:0] f_payload = '0;
  logic ps_valid; logic [D-1:0][ELEM_W-1:0] ps_data;
  logic ev_stall, ev_skip, ev_partial, ev_zfill;
  int checks = 0, failures = 0, gap_pct = 0;
  int n_busy, n_stall, n_skip, n_part, n_zf;

  legion #(.D(D), .C(C), .DEPTH(DEPTH), .ZTB_DEPTH(256)) dut (.*);
  always #5 clk = ~clk;
  initial begin #80000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) begin
    if (busy) n_busy++;
    if (ev_stall) n_stall++;
    if (ev_skip) n_skip++;
    if (ev_partial) n_part++;
    if (ev_zfill) n_zf++;
  end

  task automatic send(link_e lk, logic [C-1:0][D-1:0][7:0] pl);
    while ($urandom_range(0, 99) < gap_pct) @(negedge clk);
    f_valid = 1; f_link = lk; f_payload = pl; f_core = C;
    @(posedge clk); while (!f_ready) @(posedge clk);
    @(negedge clk); f_valid = 0;
  endtask

  task automatic run(dl_job j, int gaps);
    int exp_busy, bank, row, col;
    logic [C-1:0][D-1:0][7:0] pl;
    for (int i = 0; i < j.zm.size(); i++) begin
      @(negedge clk); ztb_we = 1; ztb_waddr = ZAW'(i); ztb_wdata = C'(j.zm[i]);
    end
    @(negedge clk); ztb_we = 0;
    gap_pct = gaps; n_busy = 0;
    wl = '{m: 16'(j.m), k: 16'(j.k), n: 16'(j.n), mode: j.md}; start = 1;
    @(negedge clk); start = 0;
    for (int t = 0; t < j.ntn; t++)
      for (int kw = 0; kw < j.kt; kw++) begin
        if (j.skipped(t, kw)) continue;
        for (int i = 0; i < D; i++) begin
          for (int c = 0; c < C; c++) for (int x = 0; x < D; x++) pl[c][x] = j.wbyte(t, kw, c, i, x);
          send(LINK_WEIGHT, pl);
        end
        for (int mm = 0; mm < j.mt * D; mm++) begin
          for (int c = 0; c < C; c++) for (int x = 0; x < D; x++) pl[c][x] = j.abyte(kw, c, mm, x);
          send(LINK_ACT, pl);
        end
      end
    while (busy) @(negedge clk);
    exp_busy = j.kt * j.ntn * (D * (j.mt + 1) + 1) + D;
    if (gaps == 0 && j.zm.sum() == 0) begin
      checks++;
      if (n_busy != exp_busy) begin failures++; $display("FAIL latency %0d exp %0d", n_busy, exp_busy); end
    end
    // read back and compare
    for (int mm = 0; mm < j.m; mm++)
      for (int nn = 0; nn < j.n; nn += D) begin
        j.where(mm, nn, bank, row, col);
        pl = '0; pl[0][1:0] = 16'(row | (bank << AW));
        gap_pct = 0; send(LINK_PSUM, pl);
        for (int x = 0; x < D && nn + x < j.n; x++) begin
          checks++;
          if (ps_data[x] !== j.stored(mm, nn + x)) begin
            failures++;
            if (failures < 8) $display("FAIL mode %0d m %0d n %0d got %0d exp %0d", j.md, mm, nn+x, signed'(ps_data[x]), signed'(j.stored(mm, nn+x)));
          end
        end
      end
  endtask

  initial begin
    dl_job j;
    repeat (2) @(negedge clk); rst_n = 1;
    j = new(D, C, 32, 512, 128, MODE_PROJ2, AW); j.fill(0); run(j, 0);
    j = new(D, C, 20, 300, 80,  MODE_DENSE, AW); j.fill(0); run(j, 0);
    j = new(D, C, 16, 256, 64,  MODE_PROJ4, AW); j.fill(0); run(j, 0);
    j = new(D, C, 20, 300, 80,  MODE_DENSE, AW); j.fill(1); run(j, 20);
    j = new(D, C, 16, 512, 128, MODE_PROJ2, AW); j.fill(2); run(j, 10);
    j = new(D, C, 16, 512, 64,  MODE_PROJ4, AW); j.fill(2); run(j, 0);
    checks++;
    if (n_stall == 0 || n_skip == 0 || n_part == 0 || n_zf == 0) begin
      failures++; $display("FAIL mechanism not exercised: stall %0d skip %0d partial %0d zfill %0d", n_stall, n_skip, n_part, n_zf);
    end
    $display("mechanisms: stall cycles %0d, skipped windows %0d, partial windows %0d, zero fills %0d", n_stall, n_skip, n_part, n_zf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
