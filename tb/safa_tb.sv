// Self-checking testbench for safa.
//
// For each of the 8 input combinations, and several random arrival orders,
// the three dual-rail inputs are raised one at a time and later returned to
// spacer one at a time, as a 4-phase sender would. After every step:
//   - no output may carry the illegal code (1,1);
//   - an output may be spacer or its final value, never the wrong value;
// and at defined points the exact early-output behaviour is checked:
//   - with a and b present but cin still spacer, cout must already be valid
//     when a == b (early set) and spacer otherwise; sum must be spacer;
//   - with all three present, sum and cout equal a+b+cin;
//   - with a and b back at spacer but cin still present, cout must be spacer
//     (early reset) while sum keeps its value;
//   - with all inputs spacer, both outputs are spacer.
// Reference values come from integer addition.
module safa_tb;
  import dr_pkg::*;

  dr_t a, b, cin, sum, cout;
  int checks = 0, failures = 0;
  int early_set = 0, early_reset = 0;

  safa dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out(input dr_t got, input dr_t exp_val, input logic must_be_valid,
                           input logic must_be_spacer, input string what);
    checks++;
    if (dr_is_illegal(got) ||
        (dr_is_data(got) && got != exp_val) ||
        (must_be_valid && got != exp_val) ||
        (must_be_spacer && !dr_is_spacer(got))) begin
      failures++;
      $display("%s: got %b expected %b (valid=%b spacer=%b) a=%b b=%b cin=%b",
               what, got, exp_val, must_be_valid, must_be_spacer, a, b, cin);
    end
  endtask

  task automatic step_check(input dr_t es, input dr_t ec);
    #1;
    check_out(sum,  es, 1'b0, 1'b0, "sum");
    check_out(cout, ec, 1'b0, 1'b0, "cout");
  endtask

  initial begin
    a = DR_SPACER; b = DR_SPACER; cin = DR_SPACER;
    #1;
    check_out(sum, DR_SPACER, 1'b0, 1'b1, "init sum");
    check_out(cout, DR_SPACER, 1'b0, 1'b1, "init cout");

    for (int rep = 0; rep < 20; rep++) begin
      for (int v = 0; v < 8; v++) begin
        logic va, vb, vc;
        logic [1:0] total;
        dr_t es, ec;
        int unsigned order;
        {va, vb, vc} = 3'(v);
        total = 2'(va) + 2'(vb) + 2'(vc);
        es = dr_encode(total[0]);
        ec = dr_encode(total[1]);

        // set phase: a and b in random order, then cin
        order = $urandom_range(0, 1);
        if (order == 0) begin a = dr_encode(va); step_check(es, ec); b = dr_encode(vb); end
        else            begin b = dr_encode(vb); step_check(es, ec); a = dr_encode(va); end
        step_check(es, ec);
        check_out(sum, es, 1'b0, 1'b1, "sum before cin");
        if (va == vb) begin
          check_out(cout, ec, 1'b1, 1'b0, "cout early set");
          early_set++;
        end else begin
          check_out(cout, ec, 1'b0, 1'b1, "cout waits for cin");
        end
        cin = dr_encode(vc);
        #1;
        check_out(sum,  es, 1'b1, 1'b0, "sum");
        check_out(cout, ec, 1'b1, 1'b0, "cout");

        // reset phase: a and b to spacer, then cin
        order = $urandom_range(0, 1);
        if (order == 0) begin a = DR_SPACER; step_check(es, ec); b = DR_SPACER; end
        else            begin b = DR_SPACER; step_check(es, ec); a = DR_SPACER; end
        step_check(es, ec);
        check_out(cout, ec, 1'b0, 1'b1, "cout early reset");
        check_out(sum,  es, 1'b1, 1'b0, "sum held until cin resets");
        early_reset++;
        cin = DR_SPACER;
        #1;
        check_out(sum,  es, 1'b0, 1'b1, "sum spacer");
        check_out(cout, ec, 1'b0, 1'b1, "cout spacer");
      end
    end

    checks++;
    if (early_set == 0 || early_reset == 0) begin
      failures++;
      $display("early set/reset never exercised");
    end
    $display("early_set=%0d early_reset=%0d", early_set, early_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
