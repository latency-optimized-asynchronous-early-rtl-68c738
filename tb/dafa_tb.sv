// Self-checking testbench for dafa.
//
// All 32 combinations of two 2-bit operands and a carry input are applied
// many times, each operand bit raised in a random order, then cin; then the
// operands return to spacer in a random order, then cin. After every step no
// output may be illegal or carry a wrong value. At defined points the exact
// early-output behaviour is checked against the function of the equations:
//   - with the operands present and cin still spacer, cout must be valid
//     unless both bit pairs propagate (a1 != b1 and a0 != b0), the upper sum
//     bit must be valid unless the lower pair propagates, and the lower sum
//     bit must be spacer;
//   - with everything present, {cout,sum} equals a+b+cin;
//   - with the operands back at spacer and cin still present, cout and the
//     the upper sum bit must be spacer unless the lower pair propagates (then
//     it holds through its C-element), the lower sum bit holds;
//   - with everything spacer, all outputs are spacer.
module dafa_tb;
  import dr_pkg::*;

  dr_t [1:0] a, b, sum;
  dr_t       cin, cout;
  int checks = 0, failures = 0;
  int early_cout = 0, early_sum1 = 0, full_prop = 0;

  dafa dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

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

  task automatic check_all(input dr_t [2:0] e);
    check_out(sum[0], e[0], 1'b0, 1'b0, "sum0");
    check_out(sum[1], e[1], 1'b0, 1'b0, "sum1");
    check_out(cout,   e[2], 1'b0, 1'b0, "cout");
  endtask

  initial begin
    a = '0; b = '0; cin = DR_SPACER;
    #1;
    check_all('0);

    for (int rep = 0; rep < 20; rep++) begin
      for (int v = 0; v < 32; v++) begin
        logic [1:0] va, vb;
        logic       vc;
        logic [2:0] total;
        dr_t  [2:0] e;
        logic       p1, p0;
        int         pos [4];
        {va, vb, vc} = 5'(v);
        total = 3'(va) + 3'(vb) + 3'(vc);
        for (int k = 0; k < 3; k++) e[k] = dr_encode(total[k]);
        p1 = va[1] ^ vb[1];
        p0 = va[0] ^ vb[0];

        // random arrival order of the four operand bits
        for (int k = 0; k < 4; k++) pos[k] = k;
        for (int k = 3; k > 0; k--) begin
          int j, t;
          j = $urandom_range(0, k);
          t = pos[k]; pos[k] = pos[j]; pos[j] = t;
        end
        for (int k = 0; k < 4; k++) begin
          case (pos[k])
            0: a[0] = dr_encode(va[0]);
            1: a[1] = dr_encode(va[1]);
            2: b[0] = dr_encode(vb[0]);
            default: b[1] = dr_encode(vb[1]);
          endcase
          #1;
          check_all(e);
        end

        // operands present, carry not yet
        check_out(sum[0], e[0], 1'b0, 1'b1, "sum0 waits for cin");
        if (!(p1 && p0)) begin
          check_out(cout, e[2], 1'b1, 1'b0, "cout early set");
          early_cout++;
        end else begin
          check_out(cout, e[2], 1'b0, 1'b1, "cout waits for cin");
          full_prop++;
        end
        if (!p0) begin
          check_out(sum[1], e[1], 1'b1, 1'b0, "sum1 early set");
          early_sum1++;
        end else begin
          check_out(sum[1], e[1], 1'b0, 1'b1, "sum1 waits for cin");
        end

        cin = dr_encode(vc);
        #1;
        check_out(sum[0], e[0], 1'b1, 1'b0, "sum0");
        check_out(sum[1], e[1], 1'b1, 1'b0, "sum1");
        check_out(cout,   e[2], 1'b1, 1'b0, "cout");

        // operands back to spacer in random order
        for (int k = 0; k < 4; k++) begin
          case (pos[3-k])
            0: a[0] = DR_SPACER;
            1: a[1] = DR_SPACER;
            2: b[0] = DR_SPACER;
            default: b[1] = DR_SPACER;
          endcase
          #1;
          check_all(e);
        end
        check_out(cout,   e[2], 1'b0, 1'b1, "cout early reset");
        // the upper sum rail was set through a C-element with cin only when
        // the lower pair propagates; that C-element holds until cin resets
        if (p0) check_out(sum[1], e[1], 1'b1, 1'b0, "sum1 held");
        else    check_out(sum[1], e[1], 1'b0, 1'b1, "sum1 early reset");
        check_out(sum[0], e[0], 1'b1, 1'b0, "sum0 held");

        cin = DR_SPACER;
        #1;
        check_out(sum[0], e[0], 1'b0, 1'b1, "sum0 spacer");
        check_out(sum[1], e[1], 1'b0, 1'b1, "sum1 spacer");
        check_out(cout,   e[2], 1'b0, 1'b1, "cout spacer");
      end
    end

    checks++;
    if (early_cout == 0 || early_sum1 == 0 || full_prop == 0) begin
      failures++;
      $display("an early-output case was never exercised");
    end
    $display("early_cout=%0d early_sum1=%0d full_propagate=%0d", early_cout, early_sum1, full_prop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
