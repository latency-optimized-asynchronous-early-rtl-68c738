// One asynchronous pipeline stage around the early output ripple carry adder.
//
// This is the stage of a delay-insensitive, 4-phase return-to-zero pipeline:
//
//   a,b,cin -> input register -> eo_rca -> output register -> sum,cout
//                    |                            |
//             completion detector          completion detector
//                    |                            |
//                ackout (to sender)     inverted, ack_in of the input register
//
// Protocol, seen from outside:
//   1. With ackout = 0 the sender puts a code word on a, b and cin (in any
//      order, bit by bit).
//   2. The input register passes it; once every input bit holds data the
//      input completion detector raises ackout. The adder meanwhile produces
//      sum and cout, which the output register passes while rx_ackout = 0.
//   3. Once the output register holds a complete result, its completion
//      detector closes the input register (ack_in = 0): the stage will now
//      accept only a spacer. The receiver reads sum/cout and raises rx_ackout.
//   4. The sender returns a, b, cin to spacer after seeing ackout = 1; the
//      input register and then the adder clear, ackout falls. The output
//      register clears once rx_ackout = 1, its detector falls, and the input
//      register opens again; the receiver lowers rx_ackout.
// A slow receiver thus stalls the stage, and through it the sender.
//
// Following the paper's Fig 1 the register input acknowledge ("ackin") is the
// inverse of the next stage's completion-detector output ("ackout"), the
// registers and detectors are built from 2-input C-elements, and the function
// block is the SAFA/DAFA adder. The output register stands for the next
// stage's register of that figure. The active-low clear rst_n (empties both
// registers; hold it while the inputs are spacer) is this design's addition.
//
// Latches and combinational loops: the C-elements are latches by nature and
// the acknowledge paths form the loops of the handshake; both are intended.
module async_rca_stage
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH    = 32,
  parameter int unsigned NUM_SAFA = 2
) (
  input  logic            rst_n,
  // from the sender
  input  dr_t [WIDTH-1:0] a,
  input  dr_t [WIDTH-1:0] b,
  input  dr_t             cin,
  output logic            ackout,
  // to the receiver
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout,
  input  logic            rx_ackout
);

  localparam int unsigned IN_W  = 2*WIDTH + 1;
  localparam int unsigned OUT_W = WIDTH + 1;

  dr_t [IN_W-1:0]  in_d, in_q;
  dr_t [OUT_W-1:0] out_d, out_q;
  dr_t [WIDTH-1:0] ra, rb, rsum;
  dr_t             rcin, rcout;
  logic            in_ack_in, out_done;

  // ---- current stage: input register and its completion detector ----
  assign in_d = {cin, b, a};

  dr_register #(.WIDTH(IN_W)) u_in_reg (
    .rst_n (rst_n),
    .ack_in(in_ack_in),
    .d     (in_d),
    .q     (in_q)
  );

  completion_detector #(.WIDTH(IN_W)) u_in_cd (
    .d   (in_q),
    .done(ackout)
  );

  assign ra   = in_q[WIDTH-1:0];
  assign rb   = in_q[2*WIDTH-1:WIDTH];
  assign rcin = in_q[2*WIDTH];

  // ---- function block ----
  eo_rca #(.WIDTH(WIDTH), .NUM_SAFA(NUM_SAFA)) u_rca (
    .a   (ra),
    .b   (rb),
    .cin (rcin),
    .sum (rsum),
    .cout(rcout)
  );

  // ---- next stage register and its completion detector ----
  assign out_d = {rcout, rsum};

  dr_register #(.WIDTH(OUT_W)) u_out_reg (
    .rst_n (rst_n),
    .ack_in(~rx_ackout),
    .d     (out_d),
    .q     (out_q)
  );

  completion_detector #(.WIDTH(OUT_W)) u_out_cd (
    .d   (out_q),
    .done(out_done)
  );

  assign in_ack_in = ~out_done;

  assign sum  = out_q[WIDTH-1:0];
  assign cout = out_q[WIDTH];

endmodule
