// Early output dual-rail full adder (RTZ or RTO).
//
// Computes sum = a ^ b ^ cin and cout = majority(a, b, cin) on dual-rail
// inputs. The gate structure follows the paper's disjoint sum-of-products
// full adder:
//   X = A0.B0 + A1.B1            (a == b, both arrived)
//   Y = A0.B1 + A1.B0            (a != b, both arrived)
//   SUM1 = C(CIN1,X) + C(CIN0,Y)  SUM0 = C(CIN0,X) + C(CIN1,Y)
//   COUT1 = CIN1.Y + A1.B1        COUT0 = CIN0.Y + A0.B0
// where C() is a 2-input C-element. The carry is early output: when a == b it
// is produced without waiting for cin, and it returns to spacer as soon as a
// and b do. The sum waits for all three inputs (through the C-elements) and
// returns to spacer only after cin does, so the sum outputs indicate the carry
// input. For RTO every AND/OR is replaced by its dual (OR/AND); the
// C-elements and their inputs stay the same, as the paper prescribes.
//
// Interface: dual-rail a, b, cin in, sum, cout out. No clock; outputs change
// monotonically (rising for RTZ data, falling for RTO data).
module dr_full_adder
  import dr_pkg::*;
#(
  parameter protocol_e PROTOCOL = RTO
) (
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum,
  output dr_t cout
);

  logic x, y;              // a==b and a!=b detection
  logic c1x, c0x, c1y, c0y;  // C-element outputs

  generate
    if (PROTOCOL == RTZ) begin : g_rtz
      assign x = (a.r0 & b.r0) | (a.r1 & b.r1);
      assign y = (a.r0 & b.r1) | (a.r1 & b.r0);
      assign sum.r1  = c1x | c0y;
      assign sum.r0  = c0x | c1y;
      assign cout.r1 = (cin.r1 & y) | (a.r1 & b.r1);
      assign cout.r0 = (cin.r0 & y) | (a.r0 & b.r0);
    end else begin : g_rto
      assign x = (a.r0 | b.r0) & (a.r1 | b.r1);
      assign y = (a.r0 | b.r1) & (a.r1 | b.r0);
      assign sum.r1  = c1x & c0y;
      assign sum.r0  = c0x & c1y;
      assign cout.r1 = (cin.r1 | y) & (a.r1 | b.r1);
      assign cout.r0 = (cin.r0 | y) & (a.r0 | b.r0);
    end
  endgenerate

  dr_c_element u_c1x (.a(cin.r1), .b(x), .z(c1x));
  dr_c_element u_c0x (.a(cin.r0), .b(x), .z(c0x));
  dr_c_element u_c1y (.a(cin.r1), .b(y), .z(c1y));
  dr_c_element u_c0y (.a(cin.r0), .b(y), .z(c0y));

endmodule
