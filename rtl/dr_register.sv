// Dual-rail 4-phase register (the "current/next stage register" of a stage).
//
// Each rail of each of the WIDTH dual-rail bits passes through a two-input
// C-element whose other input is the acknowledge from the following stage,
// ack_in (1 = "send data", 0 = "send spacer"). A rail therefore rises only
// when its input has risen and ack_in is 1, and falls only when its input has
// fallen and ack_in is 0: the register takes a new code word only after the
// previous one has been acknowledged and cleared. Its delay is one C-element.
//
// Following the paper, the register is made of 2-input C-elements. The
// active-low clear rst_n, which empties the register to spacer, is this
// design's addition. No clock; zero delay.
module dr_register
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH = 65
) (
  input  logic             rst_n,
  input  logic             ack_in,
  input  dr_t [WIDTH-1:0]  d,
  output dr_t [WIDTH-1:0]  q
);

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    c_element_rst u_c_r1 (.rst_n(rst_n), .a(d[i].r1), .b(ack_in), .y(q[i].r1));
    c_element_rst u_c_r0 (.rst_n(rst_n), .a(d[i].r0), .b(ack_in), .y(q[i].r0));
  end

endmodule
