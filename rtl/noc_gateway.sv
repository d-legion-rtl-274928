// noc_gateway: NoC gateway of one Legion.
//
// Receives the flits the NoC delivers to this Legion and steers them by LINK_ID:
//   LINK_WEIGHT: a weight beat (one permuted weight row per core) for the mapper
//   LINK_ACT   : an activation beat (one activation row per core)
//   LINK_PSUM  : a psum read-out request; payload bits [AW-1:0] give the row
//                address and [AW+1:AW] the bank; the row is returned on the
//                Legion's psum output one cycle later. Only taken while idle.
// CORE_ID selects the cores: the value C means all cores, payload slice c going
// to core c; a value below C sends payload slice 0 to that core only (core_sel
// one-hot). A flit is accepted (f_ready) only when its link can take it now.
// Combinational. The gateway and the [LEGION_ID | CORE_ID | LINK_ID] prefix are
// from the paper; the encodings and the read-out request are this design's.
module noc_gateway
  import dlegion_pkg::*;
#(
  parameter int unsigned D  = 16,
  parameter int unsigned C  = 8,
  parameter int unsigned AW = 14
) (
  input  logic                         f_valid,
  output logic                         f_ready,
  input  logic [$clog2(C):0]           f_core,
  input  link_e                        f_link,
  input  logic [C-1:0][D-1:0][7:0]     f_payload,
  // to the mapper / cores
  output logic                         w_valid,
  input  logic                         w_ready,
  output logic                         a_valid,
  input  logic                         a_ready,
  output logic [C-1:0]                 core_sel,
  output logic [C-1:0][D-1:0][7:0]     core_data,
  // psum read-out request
  input  logic                         rd_ready,
  output logic                         rd_req,
  output logic [1:0]                   rd_bank,
  output logic [AW-1:0]                rd_addr
);

  logic all_cores;
  assign all_cores = (32'(f_core) >= C);

  always_comb begin
    core_sel  = '0;
    core_data = '0;
    if (all_cores) begin
      core_sel  = '1;
      core_data = f_payload;
    end else begin
      core_sel[f_core[$clog2(C)-1:0]]  = 1'b1;
      core_data[f_core[$clog2(C)-1:0]] = f_payload[0];
    end
    w_valid = f_valid && (f_link == LINK_WEIGHT);
    a_valid = f_valid && (f_link == LINK_ACT);
    rd_req  = f_valid && (f_link == LINK_PSUM) && rd_ready;
    {rd_bank, rd_addr} = (AW+2)'(f_payload[0]);
    case (f_link)
      LINK_WEIGHT: f_ready = w_ready;
      LINK_ACT:    f_ready = a_ready;
      LINK_PSUM:   f_ready = rd_ready;
      default:     f_ready = 1'b1;     // unknown link: dropped
    endcase
  end

endmodule
