// Self-checking testbench for eo_rca at its default size (32 bits, 2 SAFAs,
// 15 DAFAs).
//
// Each vector is applied the way a delay-insensitive sender may apply it: the
// 64 operand bits arrive one at a time in a random order, then the carry
// input; then the operand bits return to spacer in a random order, then the
// carry. Checks, against integer addition:
//   - after every single step, no output is illegal and no output carries a
//     wrong value (outputs only ever move between spacer and the right value);
//   - with all operands present and cin still spacer, exactly the outputs the
//     early-output structure can already decide are valid: a position's sum
//     needs a known carry into it (the upper bit of a DAFA also when its lower
//     pair does not propagate), and a stage's carry is known when its operands
//     generate or kill, or its carry input is known;
//   - with cin present, every output is valid and {cout,sum} = a + b + cin;
//   - with the operands back at spacer and cin present, every output except
//     the least significant sum bit is spacer (early reset); with cin spacer
//     too, all outputs are spacer.
// Vectors: directed corner cases (full carry propagation, 0+0, all ones) and
// random ones.
module eo_rca_tb;
  import dr_pkg::*;

  localparam int unsigned WIDTH    = 32;
  localparam int unsigned NUM_SAFA = 2;
  localparam int unsigned NUM_VEC  = 400;

  dr_t [WIDTH-1:0] a, b, sum;
  dr_t             cin, cout;
  int checks = 0, failures = 0;
  int early_outputs = 0, full_propagate = 0;

  eo_rca #(.WIDTH(WIDTH), .NUM_SAFA(NUM_SAFA)) dut (
    .a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin : watchdog
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Outputs may be spacer or the expected value; with must_valid set they
  // must be the expected value; with must_spacer they must be spacer.
  task automatic check_outputs(input logic [WIDTH:0] exp_bits,
                               input logic [WIDTH:0] must_valid,
                               input logic [WIDTH:0] must_spacer,
                               input string what);
    dr_t [WIDTH:0] got;
    logic bad;
    got = {cout, sum};
    bad = 1'b0;
    for (int i = 0; i <= WIDTH; i++) begin
      dr_t e;
      e = dr_encode(exp_bits[i]);
      if (dr_is_illegal(got[i]) || (dr_is_data(got[i]) && got[i] != e) ||
          (must_valid[i] && got[i] != e) || (must_spacer[i] && !dr_is_spacer(got[i])))
        bad = 1'b1;
    end
    checks++;
    if (bad) begin
      failures++;
      if (failures < 20)
        $display("%s: outputs %b expected value %b valid-mask %b spacer-mask %b",
                 what, got, exp_bits, must_valid, must_spacer);
    end
  endtask

  // Which outputs can be valid with all operands present and cin absent.
  function automatic logic [WIDTH:0] early_mask(input logic [WIDTH-1:0] va,
                                                input logic [WIDTH-1:0] vb);
    logic [WIDTH:0] m;
    logic known;
    m = '0;
    known = 1'b0;
    for (int i = 0; i < NUM_SAFA; i++) begin
      m[i]  = known;
      known = known | (va[i] == vb[i]);
    end
    for (int i = NUM_SAFA; i < WIDTH; i += 2) begin
      logic p1, p0;
      p0 = va[i] ^ vb[i];
      p1 = va[i+1] ^ vb[i+1];
      m[i]   = known;
      m[i+1] = known | !p0;
      known  = known | !(p1 && p0);
    end
    m[WIDTH] = known;
    return m;
  endfunction

  task automatic shuffle(ref int order[], input int n);
    order = new[n];
    for (int i = 0; i < n; i++) order[i] = i;
    for (int i = n-1; i > 0; i--) begin
      int j, t;
      j = $urandom_range(0, i);
      t = order[i]; order[i] = order[j]; order[j] = t;
    end
  endtask

  task automatic run_vector(input logic [WIDTH-1:0] va, input logic [WIDTH-1:0] vb,
                            input logic vc);
    logic [WIDTH:0] total, em, spacer_after;
    int order[];
    total = {1'b0, va} + {1'b0, vb} + (WIDTH+1)'(vc);
    em = early_mask(va, vb);

    shuffle(order, 2*WIDTH);
    for (int k = 0; k < 2*WIDTH; k++) begin
      int p;
      p = order[k];
      if (p < WIDTH) a[p] = dr_encode(va[p]);
      else           b[p-WIDTH] = dr_encode(vb[p-WIDTH]);
      #1;
      check_outputs(total, '0, '0, "operand arrival");
    end
    check_outputs(total, em, ~em, "operands only");
    for (int i = 0; i <= WIDTH; i++) if (em[i]) early_outputs++;
    if (!em[WIDTH]) full_propagate++;

    cin = dr_encode(vc);
    #1;
    check_outputs(total, '1, '0, "all inputs");

    shuffle(order, 2*WIDTH);
    for (int k = 0; k < 2*WIDTH; k++) begin
      int p;
      p = order[k];
      if (p < WIDTH) a[p] = DR_SPACER;
      else           b[p-WIDTH] = DR_SPACER;
      #1;
      check_outputs(total, '0, '0, "operand reset");
    end
    spacer_after = {{WIDTH{1'b1}}, 1'b0};
    check_outputs(total, ~spacer_after, spacer_after, "operands spacer, cin present");

    cin = DR_SPACER;
    #1;
    check_outputs(total, '0, '1, "all spacer");
  endtask

  initial begin
    a = '0; b = '0; cin = DR_SPACER;
    #1;
    check_outputs('0, '0, '1, "init");

    run_vector(32'hAAAA_AAAA, 32'h5555_5555, 1'b1);   // carry ripples end to end
    run_vector(32'hAAAA_AAAA, 32'h5555_5555, 1'b0);
    run_vector(32'h0000_0000, 32'h0000_0000, 1'b0);
    run_vector(32'hFFFF_FFFF, 32'hFFFF_FFFF, 1'b1);
    run_vector(32'hFFFF_FFFF, 32'h0000_0000, 1'b1);
    run_vector(32'h7FFF_FFFF, 32'h0000_0001, 1'b0);
    for (int v = 0; v < NUM_VEC; v++)
      run_vector(WIDTH'($urandom), WIDTH'($urandom), 1'($urandom_range(0, 1)));

    checks++;
    if (early_outputs == 0 || full_propagate == 0) begin
      failures++;
      $display("early output or full propagation never exercised");
    end
    $display("early_outputs=%0d full_propagate=%0d", early_outputs, full_propagate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
