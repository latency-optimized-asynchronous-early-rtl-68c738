// Two-input Muller C-element.
//
// The output goes to 1 when both inputs are 1, to 0 when both are 0, and keeps
// its value while the inputs differ. It is the state-holding gate of every
// block here: the sum outputs of the full adders, the registers and the
// completion-detector trees are all built from it.
//
// The behaviour is the one the paper defines; the paper's cell is a custom
// 12-transistor gate, which this design expresses as a level-sensitive latch
// that is transparent (and loads input a) exactly when a and b agree. The
// latch is intended: it is the C-element's state (some lint tools do not
// recognise the hold case as a latch; the output is not assigned while a != b). There is no reset; every
// instance sits where its inputs return to 0 during the spacer phase, which
// clears it. Zero delay; the output settles in the same time step as the
// inputs.
module c_element (
  input  logic a,
  input  logic b,
  output logic y
);

  always_latch begin
    if (a == b) y = a;
  end

endmodule
