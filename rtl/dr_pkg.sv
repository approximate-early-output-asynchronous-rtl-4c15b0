// Dual-rail encoding shared by the early output adder family.
//
// Every binary signal travels on two wires, r1 (true rail) and r0 (false
// rail). Two 4-phase handshake conventions are supported:
//   RTZ (return-to-zero): 1 = (r1,r0)=(1,0), 0 = (0,1), spacer = (0,0);
//                         (1,1) is illegal.
//   RTO (return-to-one):  1 = (0,1), 0 = (1,0), spacer = (1,1);
//                         (0,0) is illegal.
// An RTO word is therefore the bitwise complement of the RTZ word for the same
// value, and an RTO circuit is the Boolean dual of its RTZ counterpart.
// The encodings follow the paper; the helper functions are this design's own.
package dr_pkg;

  typedef enum logic {
    RTZ = 1'b0,
    RTO = 1'b1
  } protocol_e;

  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;

  // Level of every rail in the spacer (0 for RTZ, 1 for RTO).
  function automatic logic spacer_level(protocol_e p);
    return (p == RTO);
  endfunction

  function automatic dr_t spacer(protocol_e p);
    dr_t s;
    s.r1 = spacer_level(p);
    s.r0 = spacer_level(p);
    return s;
  endfunction

  function automatic dr_t encode(protocol_e p, logic v);
    dr_t e;
    e.r1 = v;
    e.r0 = ~v;
    if (p == RTO) e = ~e;
    return e;
  endfunction

  function automatic logic is_spacer(protocol_e p, dr_t d);
    return (d == spacer(p));
  endfunction

  function automatic logic is_data(dr_t d);
    return (d.r1 != d.r0);
  endfunction

  function automatic logic is_illegal(protocol_e p, dr_t d);
    return (d.r1 == d.r0) && (d.r1 != spacer_level(p));
  endfunction

  // Value of a data code word (meaningless for spacer or illegal words).
  function automatic logic decode(protocol_e p, dr_t d);
    return (p == RTO) ? d.r0 : d.r1;
  endfunction

  // Level the completion detector's ACKOUT takes once data has been
  // captured: 1 for RTZ, 0 for RTO (RTO raises ACKOUT on the spacer).
  function automatic logic ack_after_data(protocol_e p);
    return (p == RTZ);
  endfunction

endpackage
