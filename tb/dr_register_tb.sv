// Self-checking testbench for dr_register (WIDTH = 8).
//
// Checks the 4-phase register rules rail by rail against an independent
// reference (one held value per rail):
//   - after the clear, every output is spacer;
//   - with ack_in = 1 a rail rises as soon as its input rises, but a falling
//     input is not passed (the register holds the code word);
//   - with ack_in = 0 a rail falls as soon as its input falls, but a rising
//     input is not passed (the register holds the spacer);
// Inputs change bit by bit in random order; ack_in toggles only in the
// states a 4-phase environment would allow, plus random "early" changes on
// the other side to exercise the hold behaviour.
module dr_register_tb;
  import dr_pkg::*;

  localparam int unsigned W = 8;

  logic        rst_n, ack_in;
  dr_t [W-1:0] d, q;
  logic [2*W-1:0] ref_q;
  int checks = 0, failures = 0;
  int holds_data = 0, holds_spacer = 0;

  dr_register #(.WIDTH(W)) dut (.rst_n(rst_n), .ack_in(ack_in), .d(d), .q(q));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: every rail is a C-element of (input rail, ack_in)
  task automatic update_ref();
    logic [2*W-1:0] dv;
    dv = d;
    for (int i = 0; i < 2*W; i++)
      if (dv[i] == ack_in) ref_q[i] = ack_in;
  endtask

  task automatic check();
    #1;
    update_ref();
    checks++;
    if (q !== ref_q) begin
      failures++;
      $display("q=%b expected %b (d=%b ack_in=%b)", q, ref_q, d, ack_in);
    end
  endtask

  initial begin
    rst_n = 1'b0; ack_in = 1'b1; d = '0; ref_q = '0;
    #1;
    checks++;
    if (q !== '0) begin failures++; $display("not cleared: %b", q); end
    rst_n = 1'b1;
    check();

    for (int word = 0; word < 300; word++) begin
      logic [W-1:0] val;
      val = W'($urandom);
      // data phase: ack_in = 1, bits arrive one by one
      ack_in = 1'b1;
      check();
      for (int i = 0; i < W; i++) begin
        int k;
        k = (i + word) % W;
        d[k] = dr_encode(val[k]);
        check();
      end
      checks++;
      for (int i = 0; i < W; i++)
        if (q[i] != dr_encode(val[i])) begin failures++; $display("word %0d bit %0d not passed", word, i); end
      // sender withdraws a bit before the acknowledge: register must hold
      if (word % 3 == 0) begin
        d[word % W] = DR_SPACER;
        check();
        checks++;
        if (q[word % W] != dr_encode(val[word % W])) begin failures++; $display("data not held"); end
        else holds_data++;
      end
      // acknowledge: ack_in = 0, inputs go to spacer bit by bit
      ack_in = 1'b0;
      check();
      for (int i = 0; i < W; i++) begin
        d[i] = DR_SPACER;
        check();
      end
      checks++;
      if (q != '0) begin failures++; $display("word %0d not cleared", word); end
      // next data arrives before ack_in rises: register must keep spacer
      if (word % 4 == 1) begin
        d[0] = DR_ONE;
        check();
        checks++;
        if (q[0] != DR_SPACER) begin failures++; $display("spacer not held"); end
        else holds_spacer++;
        d[0] = DR_SPACER;
        check();
      end
    end

    checks++;
    if (holds_data == 0 || holds_spacer == 0) begin failures++; $display("hold cases not exercised"); end
    $display("holds_data=%0d holds_spacer=%0d", holds_data, holds_spacer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
