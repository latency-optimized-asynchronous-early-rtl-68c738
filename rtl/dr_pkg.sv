// Dual-rail (1-of-2) data types shared by the adder, the registers and the
// completion detectors.
//
// A bit X travels on two wires X1 and X0: X = 1 is (X1,X0) = (1,0), X = 0 is
// (0,1), and (0,0) is the spacer that separates successive code words in the
// 4-phase return-to-zero protocol. (1,1) is illegal. This encoding follows the
// paper; the struct, its field names and the helper functions are this
// design's own packaging.
package dr_pkg;

  // One dual-rail bit: r1 is the "true" rail (X1), r0 the "false" rail (X0).
  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;

  localparam dr_t DR_SPACER = '{r1: 1'b0, r0: 1'b0};
  localparam dr_t DR_ZERO   = '{r1: 1'b0, r0: 1'b1};
  localparam dr_t DR_ONE    = '{r1: 1'b1, r0: 1'b0};

  // Encode a single-rail bit as a dual-rail code word.
  function automatic dr_t dr_encode(input logic bit_in);
    return bit_in ? DR_ONE : DR_ZERO;
  endfunction

  // True when exactly one rail is high (a valid code word).
  function automatic logic dr_is_data(input dr_t d);
    return d.r1 ^ d.r0;
  endfunction

  // True when both rails are low.
  function automatic logic dr_is_spacer(input dr_t d);
    return ~(d.r1 | d.r0);
  endfunction

  // True for the forbidden code (1,1).
  function automatic logic dr_is_illegal(input dr_t d);
    return d.r1 & d.r0;
  endfunction

endpackage
