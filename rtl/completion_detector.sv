// Completion detector for a bus of WIDTH dual-rail bits.
//
// A 2-input OR gate per dual-rail bit tells whether that bit holds data; a
// tree of 2-input C-elements joins the WIDTH OR outputs. The output done
// rises once every bit holds a code word and falls once every bit is back to
// spacer; in between it holds. In a stage this output is the acknowledge
// returned to the previous stage.
//
// The OR-then-C-element-tree structure and the decomposition into 2-input
// C-elements are the paper's. The tree shape is this design's choice: a
// balanced binary tree stored as a heap, node k fed by nodes 2k+1 and 2k+2,
// with the OR outputs as leaves WIDTH-1 .. 2*WIDTH-2, giving a depth of
// ceil(log2(WIDTH)) C-elements. Zero delay, no clock.
module completion_detector
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH = 65
) (
  input  dr_t [WIDTH-1:0] d,
  output logic            done
);

  logic [2*WIDTH-2:0] node;

  for (genvar i = 0; i < WIDTH; i++) begin : g_or
    assign node[WIDTH-1+i] = d[i].r1 | d[i].r0;
  end

  for (genvar k = 0; k < WIDTH-1; k++) begin : g_tree
    c_element u_c (.a(node[2*k+1]), .b(node[2*k+2]), .y(node[k]));
  end

  assign done = node[0];

endmodule
