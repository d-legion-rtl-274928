// dlegion_noc: the D-Legion network-on-chip (tile distribution).
//
// One input flit stream (valid/ready) carries a header {LEGION mask, CORE_ID,
// LINK_ID} and a 1024-bit payload (C x D bytes). The flit is delivered to every
// Legion whose mask bit is set: one bit gives unicast, several bits multicast
// (for example one KV tile replicated to the Legions of a GQA group, or input
// tiles broadcast to all Legions). Delivery is all-or-nothing: the flit is
// accepted only in a cycle where every addressed Legion is ready, and then each
// of them sees valid in that same cycle. Combinational, no buffering.
// Unicast/multicast tile routing by address prefix is the paper's; a mask in
// place of a LEGION_ID field (so that any subset can be targeted) and the
// all-or-nothing delivery are this design's choices. A flit with an empty mask is
// dropped.
module dlegion_noc
  import dlegion_pkg::*;
#(
  parameter int unsigned L = 8
) (
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [L-1:0]  in_mask,
  output logic [L-1:0]  out_valid,
  input  logic [L-1:0]  out_ready
);

  assign in_ready  = &(out_ready | ~in_mask);
  assign out_valid = (in_valid && in_ready) ? in_mask : '0;


endmodule
