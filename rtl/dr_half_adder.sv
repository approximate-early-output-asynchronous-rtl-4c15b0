// Early output dual-rail half adder (RTZ or RTO).
//
// Computes sum = a ^ b and cout = a & b on dual-rail inputs; it sits in the
// least significant position of the accurate ripple carry adder. Following
// the paper, each sum rail is one complex gate and the carry uses a simple
// and a complex gate (RTZ form):
//   SUM1 = A0.B1 + A1.B0          SUM0 = A0.B0 + A1.B1
//   COUT1 = A1.B1                 COUT0 = A0.B0 + A0.B1 + A1.B0
// The RTO form is the Boolean dual (AND and OR exchanged). Purely
// combinational, no C-elements; outputs appear only once both inputs are data
// and return to spacer once both are spacer.
module dr_half_adder
  import dr_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTO
) (
  input  dr_t a,
  input  dr_t b,
  output dr_t sum,
  output dr_t cout
);

  generate
    if (PROTOCOL == RTZ) begin : g_rtz
      assign sum.r1  = (a.r0 & b.r1) | (a.r1 & b.r0);
      assign sum.r0  = (a.r0 & b.r0) | (a.r1 & b.r1);
      assign cout.r1 = a.r1 & b.r1;
      assign cout.r0 = (a.r0 & b.r0) | (a.r0 & b.r1) | (a.r1 & b.r0);
    end else begin : g_rto
      assign sum.r1  = (a.r0 | b.r1) & (a.r1 | b.r0);
      assign sum.r0  = (a.r0 | b.r0) & (a.r1 | b.r1);
      assign cout.r1 = a.r1 | b.r1;
      assign cout.r0 = (a.r0 | b.r0) & (a.r0 | b.r1) & (a.r1 | b.r0);
    end
  endgenerate

endmodule
