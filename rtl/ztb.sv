// ztb: zero-tile book of a Legion.
//
// A bitmask table with one entry per window of C tiles (one tile per core) and
// one bit per tile: bit c = 1 marks the tile of core c in that window as
// structurally zero. The table is written offline (before a workload) through the
// write port and read combinationally by the Legion mapper, entry index = window
// sequence number in the mapper's N -> K loop order. Reset clears it (no zero
// tiles). The table and its meaning are the paper's; the depth (DEPTH windows)
// and the write port are this design's choices.
module ztb #(
  parameter int unsigned C     = 8,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [C-1:0]    wdata,
  input  logic [AW-1:0]   raddr,
  output logic [C-1:0]    rdata
);

  logic [C-1:0] tbl [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) tbl[i] <= '0;
    end else if (we) begin
      tbl[waddr] <= wdata;
    end
  end

  assign rdata = tbl[raddr];

endmodule
