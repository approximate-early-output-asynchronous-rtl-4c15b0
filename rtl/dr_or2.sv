// Early output dual-rail 2-input OR (RTZ or RTO).
//
// RTZ: V1 = X1 + Y1, V0 = X0.Y0, so a 1 on either input gives a 1 output
// without waiting for the other input. RTO: the dual, V1 = X1.Y1,
// V0 = X0 + Y0. In the approximate adder each approximate sum bit is the OR of
// its augend and addend bits.
module dr_or2
  import dr_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTO
) (
  input  dr_t x,
  input  dr_t y,
  output dr_t v
);

  generate
    if (PROTOCOL == RTZ) begin : g_rtz
      assign v.r1 = x.r1 | y.r1;
      assign v.r0 = x.r0 & y.r0;
    end else begin : g_rto
      assign v.r1 = x.r1 & y.r1;
      assign v.r0 = x.r0 | y.r0;
    end
  endgenerate

endmodule
