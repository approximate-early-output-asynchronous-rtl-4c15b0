// Two-input Muller C-element.
//
// The output goes to 1 when both inputs are 1 and to 0 when both are 0; while
// the inputs differ it keeps its last value. The paper builds this cell from
// an AO222 gate with its output fed back (z = ab + az + bz). Here the same
// next-state function is written as a level-sensitive latch that is set when
// both inputs are 1 and cleared when both are 0, so the storage is explicit
// rather than a combinational loop. That latch is the intended state element;
// tools report it as a latch (Verilator's lint may instead claim that none is
// inferred; it is simulated as one).
// There is no reset: inside the adder logic the first spacer drives both inputs
// of every C-element to the same level and so initialises it. Registers use
// dr_c_element_r, which adds a reset.
//
// Timing: purely level-sensitive, no clock.
module dr_c_element (
  input  logic a,
  input  logic b,
  output logic z
);

  always_latch begin
    if (a & b)        z = 1'b1;
    else if (~a & ~b) z = 1'b0;
  end

endmodule
