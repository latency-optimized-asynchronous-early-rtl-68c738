// Two-input Muller C-element with an asynchronous, active-low clear.
//
// Same behaviour as c_element (output follows the inputs when they agree and
// holds while they differ), plus rst_n = 0 forces the output to 0. Used in the
// dual-rail registers, whose C-elements can otherwise power up holding a 1
// with the acknowledge input also at 1, a state the 4-phase protocol never
// leaves. The clear is this design's addition; the paper does not discuss
// initialisation. The latch is intended: it is the C-element's state, and
// its output closes the stage's acknowledge loop, which lint tools report as
// a combinational loop. Some lint tools also fail to recognise the hold case
// as a latch; the hold is real (the output is not assigned while a != b).
module c_element_rst (
  input  logic rst_n,
  input  logic a,
  input  logic b,
  output logic y
);

  always_latch begin
    if (!rst_n)      y = 1'b0;
    else if (a == b) y = a;
  end

endmodule
