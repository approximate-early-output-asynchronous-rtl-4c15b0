// Completion detector for a dual-rail word (RTZ or RTO).
//
// Each bit is reduced to one signal: the OR of its two rails for RTZ (1 when
// the bit holds data), the AND for RTO (1 when the bit holds the spacer). A
// balanced tree of 2-input C-elements then combines the NBITS signals, so
// ACKOUT changes only when every bit has made the same change. ACKOUT is
// therefore 1 after a complete data word for RTZ and 1 after a complete spacer
// for RTO, the handshake levels the paper gives. The paper gives only the
// detector's function; the OR/AND plus C-element tree is this design's choice.
//
// Interface: dual-rail d (NBITS bits) in, ackout out. No reset: a complete
// spacer or data word sets every C-element of the tree.
//
// Inside eo_adder_stage, lint reports a circular path through node[0] (the
// root). That is the stage's handshake loop, which closes through this output
// and the register C-elements; it is intended.
module dr_completion_detector
  import dr_pkg::*;
#(
  parameter int unsigned NBITS    = 64,
  parameter protocol_e   PROTOCOL = RTO
) (
  input  dr_t [NBITS-1:0] d,
  output logic            ackout
);

  // Tree in heap order: node[0] is the root, leaves are node[NBITS-1 +: NBITS].
  logic [2*NBITS-2:0] node;

  for (genvar i = 0; i < NBITS; i++) begin : g_leaf
    if (PROTOCOL == RTZ) begin : g_rtz
      assign node[NBITS-1+i] = d[i].r1 | d[i].r0;
    end else begin : g_rto
      assign node[NBITS-1+i] = d[i].r1 & d[i].r0;
    end
  end

  for (genvar n = 0; n < NBITS - 1; n++) begin : g_tree
    dr_c_element u_c (.a(node[2*n+1]), .b(node[2*n+2]), .z(node[n]));
  end

  assign ackout = node[0];

endmodule
