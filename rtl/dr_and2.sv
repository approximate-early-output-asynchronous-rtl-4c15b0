// Early output dual-rail 2-input AND (RTZ or RTO).
//
// The true rail is the plain AND of the true rails and the false rail the OR
// of the false rails (RTZ: Z1 = X1.Y1, Z0 = X0 + Y0), so a 0 on either input
// gives a 0 output without waiting for the other input (early set), and the
// output returns to spacer as soon as the inputs that produced it do. The RTO
// form is the dual (Z1 = X1 + Y1, Z0 = X0.Y0). In the approximate adder it
// forms the carry into the accurate part from the top approximate bit pair.
module dr_and2
  import dr_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTO
) (
  input  dr_t x,
  input  dr_t y,
  output dr_t z
);

  generate
    if (PROTOCOL == RTZ) begin : g_rtz
      assign z.r1 = x.r1 & y.r1;
      assign z.r0 = x.r0 | y.r0;
    end else begin : g_rto
      assign z.r1 = x.r1 | y.r1;
      assign z.r0 = x.r0 & y.r0;
    end
  endgenerate

endmodule
