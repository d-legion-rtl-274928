// psum_bank_ctrl: psum bank controller of a Legion.
//
// Maps an output row (N-tile index nt, row m) to the psum bank(s) that hold it
// and the row address inside the bank. Combinational.
//   projection modes: stream g of the interleaved output tiles lives in bank g
//     (all four banks active in MODE_PROJ2, banks 0 and 1 in MODE_PROJ4);
//     address = nt * rows + m.
//   MODE_DENSE: only one bank is active; successive N-tiles rotate over the
//     banks, bank = nt mod 4, address = (nt / 4) * rows + m.
// rows is the number of rows streamed per tile (MT x D). The behaviour "all banks
// active in projection mode, one bank active and iterated over in
// activation-to-activation mode" is the paper's; the address formula is this
// design's.
module psum_bank_ctrl
  import dlegion_pkg::*;
#(
  parameter int unsigned AW = 14
) (
  input  mode_e              mode,
  input  logic [DIM_W-1:0]   nt,
  input  logic [DIM_W-1:0]   m,
  input  logic [DIM_W-1:0]   rows,
  output logic [NACC-1:0]    bank_en,
  output logic [AW-1:0]      addr
);

  logic [2*DIM_W-1:0] a;

  always_comb begin
    case (mode)
      MODE_PROJ2: begin
        bank_en = 4'b1111;
        a       = 32'(nt) * 32'(rows) + 32'(m);
      end
      MODE_PROJ4: begin
        bank_en = 4'b0011;
        a       = 32'(nt) * 32'(rows) + 32'(m);
      end
      default: begin
        bank_en = 4'b0001 << nt[1:0];
        a       = 32'(nt >> 2) * 32'(rows) + 32'(m);
      end
    endcase
    addr = AW'(a);
  end

endmodule
