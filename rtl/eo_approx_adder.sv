// Early output dual-rail approximate ripple carry adder (RTZ or RTO).
//
// The WIDTH-bit word is split in two. The APPROX_BITS least significant bits
// form the approximate sub-adder: each sum bit there is simply a_i OR b_i
// (dr_or2), and the carry into the accurate part is a_{K-1} AND b_{K-1}
// (dr_and2), K = APPROX_BITS. The remaining bits form the accurate sub-adder,
// a ripple chain of early output full adders (dr_full_adder) starting at bit
// K; its final carry is the carry output. With APPROX_BITS = 0 the adder is
// exact: a half adder in bit 0 and full adders above it. The paper studies
// WIDTH = 32 with APPROX_BITS = 0, 4, 8, 12, 16 and 20; the default of 8 is one
// of those and is this design's choice.
//
// For K > 0 the result equals
//   {a[W-1:K] + b[W-1:K] + (a[K-1] & b[K-1]), a[K-1:0] | b[K-1:0]}.
//
// Interface: dual-rail arrays a, b (WIDTH bits), sum (WIDTH bits), cout.
// No clock: outputs settle to data after every input is data and return to
// spacer after every input is spacer (4-phase handshake around it).
module eo_approx_adder
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH       = 32,
  parameter int unsigned APPROX_BITS = 8,
  parameter protocol_e   PROTOCOL    = RTO
) (
  input  dr_t [WIDTH-1:0] a,
  input  dr_t [WIDTH-1:0] b,
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout
);

  // carry[i] is the carry into bit i of the accurate sub-adder.
  dr_t [WIDTH:0] carry;

  generate
    if (APPROX_BITS >= WIDTH) begin : g_bad_size
      $error("eo_approx_adder: APPROX_BITS must be smaller than WIDTH");
    end

    if (APPROX_BITS == 0) begin : g_exact_lsb
      // Fig. 3a: half adder HA1 in the least significant position.
      dr_half_adder #(.PROTOCOL(PROTOCOL)) u_ha (
        .a(a[0]), .b(b[0]), .sum(sum[0]), .cout(carry[1])
      );
    end else begin : g_approx
      // Approximate sub-adder: OR gates for the sum bits.
      for (genvar i = 0; i < APPROX_BITS; i++) begin : g_or
        dr_or2 #(.PROTOCOL(PROTOCOL)) u_or (
          .x(a[i]), .y(b[i]), .v(sum[i])
        );
      end
      // Carry into the accurate sub-adder from the top approximate bit pair.
      dr_and2 #(.PROTOCOL(PROTOCOL)) u_and (
        .x(a[APPROX_BITS-1]), .y(b[APPROX_BITS-1]), .z(carry[APPROX_BITS])
      );
    end

    // Accurate sub-adder: ripple chain of full adders.
    for (genvar i = (APPROX_BITS == 0) ? 1 : APPROX_BITS; i < WIDTH; i++) begin : g_fa
      dr_full_adder #(.PROTOCOL(PROTOCOL)) u_fa (
        .a(a[i]), .b(b[i]), .cin(carry[i]), .sum(sum[i]), .cout(carry[i+1])
      );
    end
  endgenerate

  assign cout = carry[WIDTH];

endmodule
