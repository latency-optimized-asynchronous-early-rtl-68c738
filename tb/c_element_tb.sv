// Self-checking testbench for c_element.
//
// Walks the two inputs through random sequences of single and double input
// changes and compares the output after each step with a reference that
// keeps its own copy of the state: output = input when both inputs agree,
// previous output otherwise. Starts from a = b = 0 so the state is defined.
module c_element_tb;

  logic a, b, y;
  logic ref_y;
  int   checks = 0, failures = 0;
  int   holds = 0;

  c_element dut (.a(a), .b(b), .y(y));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 1'b0; b = 1'b0; ref_y = 1'b0;
    #1;
    checks++;
    if (y !== 1'b0) begin failures++; $display("init: y=%b", y); end

    for (int i = 0; i < 2000; i++) begin
      logic na, nb;
      na = 1'($urandom_range(0, 1));
      nb = 1'($urandom_range(0, 1));
      a = na; b = nb;
      #1;
      if (na == nb) ref_y = na;
      else          holds++;
      checks++;
      if (y !== ref_y) begin
        failures++;
        $display("step %0d: a=%b b=%b y=%b expected %b", i, a, b, y, ref_y);
      end
    end

    checks++;
    if (holds == 0) begin failures++; $display("hold case never exercised"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
