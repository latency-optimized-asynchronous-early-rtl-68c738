// Self-checking testbench for completion_detector.
//
// Two instances, the 65-bit one a stage uses for its inputs (two 32-bit
// operands and a carry) and a 7-bit one (tree with an odd leaf count). For
// each, the bits are set to random code words one at a time in a random
// order and then returned to spacer one at a time in another random order.
// done must stay low until the last bit holds data, then be high; stay high
// until the last bit is spacer again, then be low.
module completion_detector_tb;
  import dr_pkg::*;

  localparam int unsigned WA = 65;
  localparam int unsigned WB = 7;

  dr_t [WA-1:0] da;
  dr_t [WB-1:0] db;
  logic done_a, done_b;
  int checks = 0, failures = 0;

  completion_detector #(.WIDTH(WA)) dut_a (.d(da), .done(done_a));
  completion_detector #(.WIDTH(WB)) dut_b (.d(db), .done(done_b));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic shuffle(ref int order[], input int n);
    order = new[n];
    for (int i = 0; i < n; i++) order[i] = i;
    for (int i = n-1; i > 0; i--) begin
      int j, t;
      j = $urandom_range(0, i);
      t = order[i]; order[i] = order[j]; order[j] = t;
    end
  endtask

  task automatic expect_done(input logic got, input logic exp_v, input string what);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("%s: done=%b expected %b", what, got, exp_v);
    end
  endtask

  initial begin
    int order[];
    da = '0; db = '0;
    #1;
    expect_done(done_a, 1'b0, "init a");
    expect_done(done_b, 1'b0, "init b");

    for (int rep = 0; rep < 100; rep++) begin
      shuffle(order, WA);
      for (int i = 0; i < WA; i++) begin
        da[order[i]] = dr_encode(1'($urandom_range(0, 1)));
        #1;
        expect_done(done_a, (i == WA-1), "a set");
      end
      shuffle(order, WA);
      for (int i = 0; i < WA; i++) begin
        da[order[i]] = DR_SPACER;
        #1;
        expect_done(done_a, (i != WA-1), "a reset");
      end

      shuffle(order, WB);
      for (int i = 0; i < WB; i++) begin
        db[order[i]] = dr_encode(1'($urandom_range(0, 1)));
        #1;
        expect_done(done_b, (i == WB-1), "b set");
      end
      shuffle(order, WB);
      for (int i = 0; i < WB; i++) begin
        db[order[i]] = DR_SPACER;
        #1;
        expect_done(done_b, (i != WB-1), "b reset");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
