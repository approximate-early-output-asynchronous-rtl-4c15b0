// One QDI pipeline stage around the early output approximate adder.
//
// Structure (the stage of the paper's Fig. 1):
//   a, b -> input register -> eo_approx_adder -> output register -> sum, cout
//                 |                                    |
//          completion detector -> ackout        completion detector
//                 ^                                    |
//                 +------------ inverter <-------------+
// The input register holds the 2*WIDTH operand bits; its completion detector
// acknowledges the sender (ackout). The output register (the "next stage
// register") captures the WIDTH+1 result bits; the inverse of its completion
// detector's ACKOUT is the input register's ACKIN, so a new operand token
// enters only after the previous result token has been captured. The output
// register's own ACKIN is the inverse of the receiver's ACKOUT (rx_ackout).
//
// Handshake (both protocols): the sender offers a token when the inverse of
// ackout invites it, i.e. RTZ: data while ackout = 0, spacer while ackout = 1;
// RTO: spacer while ackout = 0, data while ackout = 1. The receiver raises
// rx_ackout after capturing data (RTZ) or spacer (RTO) and lowers it after the
// other token. rst_n puts both registers in the spacer state.
//
// Operand tokens must be presented on all 2*WIDTH operand bits together (in
// the same instant, or at least before any result can complete). Because the
// adder is early output, the result can become complete data (or complete
// spacer) from a subset of its inputs; the output register then captures it
// and flips the input register's ACKIN, and an operand bit that had not yet
// entered the input register is shut out, which deadlocks the stage. A
// vector-driven environment, like the one the adders were evaluated with,
// satisfies this.
//
// Tools report a combinational loop through this module: it is the
// handshake loop (output register -> completion detector -> inverter -> input
// register -> adder -> output register), closed through C-element latches, and
// it is the intended asynchronous control structure, not an error.
//
// The adder logic is the paper's; the two-register arrangement, the reset and
// the port names are this design's reading of Fig. 1.
module eo_adder_stage
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH       = 32,
  parameter int unsigned APPROX_BITS = 8,
  parameter protocol_e   PROTOCOL    = RTO
) (
  input  logic            rst_n,
  input  dr_t [WIDTH-1:0] a,
  input  dr_t [WIDTH-1:0] b,
  output logic            ackout,
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout,
  input  logic            rx_ackout
);

  localparam int unsigned NIN  = 2 * WIDTH;
  localparam int unsigned NOUT = WIDTH + 1;

  dr_t [NIN-1:0]   in_d, in_q;
  dr_t [WIDTH-1:0] a_q, b_q, sum_d;
  dr_t             cout_d;
  dr_t [NOUT-1:0]  out_d, out_q;
  logic            out_ack;

  assign in_d = {b, a};
  assign a_q  = in_q[WIDTH-1:0];
  assign b_q  = in_q[NIN-1:WIDTH];

  dr_register #(.NBITS(NIN), .PROTOCOL(PROTOCOL)) u_in_reg (
    .rst_n(rst_n), .ackin(~out_ack), .d(in_d), .q(in_q)
  );

  dr_completion_detector #(.NBITS(NIN), .PROTOCOL(PROTOCOL)) u_in_cd (
    .d(in_q), .ackout(ackout)
  );

  eo_approx_adder #(.WIDTH(WIDTH), .APPROX_BITS(APPROX_BITS), .PROTOCOL(PROTOCOL)) u_adder (
    .a(a_q), .b(b_q), .sum(sum_d), .cout(cout_d)
  );

  assign out_d = {cout_d, sum_d};

  dr_register #(.NBITS(NOUT), .PROTOCOL(PROTOCOL)) u_out_reg (
    .rst_n(rst_n), .ackin(~rx_ackout), .d(out_d), .q(out_q)
  );

  dr_completion_detector #(.NBITS(NOUT), .PROTOCOL(PROTOCOL)) u_out_cd (
    .d(out_q), .ackout(out_ack)
  );

  assign sum  = out_q[WIDTH-1:0];
  assign cout = out_q[WIDTH];

endmodule
