// Dual-rail 4-phase pipeline register (RTZ or RTO).
//
// One C-element per rail, with the incoming rail and ACKIN as its inputs.
// While ACKIN is at the level that invites the next token, the register passes
// that token (data or spacer) and then holds it once ACKIN changes. With RTZ,
// ACKIN = 1 admits data and ACKIN = 0 admits the spacer; with RTO the same
// levels admit the spacer (all ones) and data respectively, because a C-element
// passes a rail only when it agrees with ACKIN. The paper names this register
// and its ACKIN input; building it from C-elements, and the asynchronous
// active-low reset to spacer, are this design's choices.
//
// Interface: rst_n, ackin, dual-rail d in and q out (NBITS bits each).
module dr_register
  import dr_pkg::*;
#(
  parameter int unsigned NBITS    = 64,
  parameter protocol_e   PROTOCOL = RTO
) (
  input  logic            rst_n,
  input  logic            ackin,
  input  dr_t [NBITS-1:0] d,
  output dr_t [NBITS-1:0] q
);

  localparam logic SP = (PROTOCOL == RTO);

  for (genvar i = 0; i < NBITS; i++) begin : g_bit
    dr_c_element_r #(.RESET_VALUE(SP)) u_c1 (
      .rst_n(rst_n), .a(d[i].r1), .b(ackin), .z(q[i].r1)
    );
    dr_c_element_r #(.RESET_VALUE(SP)) u_c0 (
      .rst_n(rst_n), .a(d[i].r0), .b(ackin), .z(q[i].r0)
    );
  end

endmodule
