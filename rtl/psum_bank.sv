// psum_bank: one psum memory bank (scratchpad) of a Legion.
//
// DEPTH rows of D elements of 32 bits (one row = D x 32 = 512 bits for D = 16).
// Simple dual-port: one synchronous write and one synchronous read per cycle, so
// a read-modify-write stream can read row m+1 while row m is written. rdata is
// registered and holds its value in cycles without re.
// The default DEPTH = 10813 rows gives 10813 x 64 B = 0.66 MiB, the bank size of
// the paper (four banks, 2.64 MB per Legion). Port structure and read latency are
// this design's choice; in silicon this array would be an SRAM macro.
module psum_bank
  import dlegion_pkg::*;
#(
  parameter int unsigned D     = 16,
  parameter int unsigned DEPTH = 10813,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [AW-1:0]                 waddr,
  input  logic [D-1:0][ELEM_W-1:0]      wdata,
  input  logic                          re,
  input  logic [AW-1:0]                 raddr,
  output logic [D-1:0][ELEM_W-1:0]      rdata
);

  logic [D-1:0][ELEM_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
