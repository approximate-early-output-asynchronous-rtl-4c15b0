// Two-input Muller C-element with an asynchronous active-low reset.
//
// Same behaviour as dr_c_element (output follows the inputs when they agree,
// holds otherwise), plus rst_n forcing the output to RESET_VALUE. Used for the
// rails of the stage registers, which must start in the spacer state; the
// paper does not describe reset, so the reset is this design's own addition.
// The storage is a level-sensitive latch on purpose (see dr_c_element).
module dr_c_element_r #(
  parameter logic RESET_VALUE = 1'b0
) (
  input  logic rst_n,
  input  logic a,
  input  logic b,
  output logic z
);

  always_latch begin
    if (!rst_n)      z = RESET_VALUE;
    else if (a & b)   z = 1'b1;
    else if (~a & ~b) z = 1'b0;
  end

endmodule
