// Early output asynchronous ripple carry adder built from SAFAs and DAFAs.
//
// A WIDTH-bit dual-rail adder: NUM_SAFA single-bit adders (safa) fill the
// least significant positions and (WIDTH-NUM_SAFA)/2 dual-bit adders (dafa)
// the rest, chained through their dual-rail carries. The default, 32 bits with
// 2 SAFAs and 15 DAFAs (17 carry stages instead of 32), is the configuration
// the paper proposes as its lowest-latency 32-bit adder. The SAFAs at the
// bottom shorten the path into the first DAFA: through the two SAFAs the
// carry is ready after three AO22 gates (CG2, then each SAFA's carry gate),
// while a DAFA in that place would cost an AND4, an OR and an AO21 first.
// Above that, each DAFA adds one AO21 to the carry path, and the last DAFA's
// sum adds a C-element and an OR3.
//
// Interface: dual-rail operands a, b, carry input cin; dual-rail sum and carry
// output cout. An output goes to data as soon as the inputs decide it, and
// the carries return to spacer as soon as the operands do (early output); the
// sum rails hold until their carry input is spacer. The enclosing stage's
// completion detector on the inputs is what guarantees that all inputs were
// seen. Zero delay, no clock. WIDTH-NUM_SAFA must be even.
module eo_rca
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH    = 32,
  parameter int unsigned NUM_SAFA = 2
) (
  input  dr_t [WIDTH-1:0] a,
  input  dr_t [WIDTH-1:0] b,
  input  dr_t             cin,
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout
);

  localparam int unsigned NUM_DAFA = (WIDTH - NUM_SAFA) / 2;

  if (((WIDTH - NUM_SAFA) % 2) != 0 || NUM_SAFA > WIDTH) begin : g_bad_split
    $error("eo_rca: WIDTH-NUM_SAFA must be even and non-negative");
  end

  // carry[i] is the carry into bit position i; carry[WIDTH] is the output.
  dr_t carry [WIDTH+1];
  assign carry[0] = cin;
  assign cout     = carry[WIDTH];

  for (genvar i = 0; i < NUM_SAFA; i++) begin : g_safa
    safa u_safa (
      .a   (a[i]),
      .b   (b[i]),
      .cin (carry[i]),
      .sum (sum[i]),
      .cout(carry[i+1])
    );
  end

  for (genvar j = 0; j < NUM_DAFA; j++) begin : g_dafa
    localparam int unsigned LSB = NUM_SAFA + 2*j;
    dafa u_dafa (
      .a   (a[LSB+1:LSB]),
      .b   (b[LSB+1:LSB]),
      .cin (carry[LSB]),
      .sum (sum[LSB+1:LSB]),
      .cout(carry[LSB+2])
    );
    // A DAFA spans two positions; the carry into its upper bit stays internal.
    assign carry[LSB+1] = DR_SPACER;
  end

endmodule
