// tb_psum_bank: self-checking test of a psum bank (small depth). Random writes
// mirrored in a reference array, reads checked one cycle later, simultaneous
// read and write of different rows, and rdata holding while re = 0.
module tb_psum_bank;
  import dlegion_pkg::*;
  localparam int D = 16, DEPTH = 64, AW = 6;
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [D-1:0][ELEM_W-1:0] wdata = '0, rdata, ref_m [DEPTH], exp_q;
  int checks = 0, failures = 0;
  psum_bank #(.D(D), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a);
      for (int j = 0; j < D; j++) wdata[j] = $urandom;
      ref_m[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 600; t++) begin
      int ra, wa;
      @(negedge clk);
      ra = $urandom_range(0, DEPTH-1); wa = $urandom_range(0, DEPTH-1);
      if (wa == ra) wa = (wa + 1) % DEPTH;
      re = 1; raddr = AW'(ra); exp_q = ref_m[ra];
      we = $urandom_range(0, 1); waddr = AW'(wa);
      for (int j = 0; j < D; j++) wdata[j] = $urandom;
      if (we) ref_m[wa] = wdata;
      @(negedge clk); re = 0; we = 0; raddr = AW'(ra ^ 1);
      checks++; if (rdata !== exp_q) failures++;
      @(negedge clk);
      checks++; if (rdata !== exp_q) failures++;   // held
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
