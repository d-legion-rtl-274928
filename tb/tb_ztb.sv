// tb_ztb: self-checking test of the zero-tile book: cleared by reset, random
// writes mirrored in a reference table, combinational reads of every entry.
module tb_ztb;
  localparam int C = 8, DEPTH = 256, AW = 8;
  logic clk = 0, rst_n = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [C-1:0] wdata = 0, rdata, ref_t [DEPTH];
  int checks = 0, failures = 0;
  ztb #(.C(C), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin ref_t[a] = '0; raddr = AW'(a); #1; checks++; if (rdata !== '0) failures++; end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk); we = 1; waddr = AW'($urandom); wdata = C'($urandom); ref_t[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < DEPTH; a++) begin raddr = AW'(a); #1; checks++; if (rdata !== ref_t[a]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
