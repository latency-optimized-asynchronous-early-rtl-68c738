// End-to-end testbench for async_rca_stage at its default parameters
// (32-bit adder, 2 SAFAs + 15 DAFAs).
//
// A sender and a receiver run the 4-phase return-to-zero protocol around the
// stage for 1000 random additions (plus a few directed ones), the size of the
// random test set used to characterise the adder.
//   Sender: waits for ackout = 0, raises the 64 operand bits one at a time in
//   a random order, then the carry input; waits for ackout = 1; returns the
//   operands to spacer in a random order, then the carry.
//   Receiver: waits until every output bit holds data, compares {cout,sum}
//   with a + b + cin computed by the sender, waits a random time (sometimes
//   long, to stall the stage), raises rx_ackout, waits until every output is
//   spacer, lowers rx_ackout.
// A monitor checks after every time step that no output is illegal and that
// any output bit that holds data has the value of the result now expected.
//
// Mechanisms counted (each must happen at least once):
//   early_set    - a result bit appears before the carry input has arrived;
//   early_reset  - cout returns to spacer while cin is still data;
//   cd_wait      - ackout stays low while only part of the inputs are present;
//   stall        - a slow receiver keeps the stage from acknowledging the
//                  next input word.
// The protocol rule checked on every word: ackout for word k only rises after
// the receiver has acknowledged word k-1.
module async_rca_stage_tb;
  import dr_pkg::*;

  localparam int unsigned WIDTH   = 32;
  localparam int unsigned NUM_VEC = 1000;

  logic            rst_n;
  dr_t [WIDTH-1:0] a, b, sum;
  dr_t             cin, cout;
  logic            ackout, rx_ackout;

  int checks = 0, failures = 0;
  int early_set = 0, early_reset = 0, cd_wait = 0, stall = 0;
  int sent = 0, acked = 0, received = 0;
  logic rx_stalling = 1'b0;
  logic [WIDTH:0] expected_q [$];
  logic done_tx = 1'b0;

  async_rca_stage dut (
    .rst_n(rst_n), .a(a), .b(b), .cin(cin), .ackout(ackout),
    .sum(sum), .cout(cout), .rx_ackout(rx_ackout));

  initial begin : watchdog
    #2000000;
    failures++;
    $display("watchdog expired: sent=%0d received=%0d", sent, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic out_all_data, out_all_spacer;
  always_comb out_all_data   = all_data();
  always_comb out_all_spacer = all_spacer();

  function automatic logic all_data();
    for (int i = 0; i < WIDTH; i++) if (!dr_is_data(sum[i])) return 1'b0;
    return dr_is_data(cout);
  endfunction

  function automatic logic all_spacer();
    for (int i = 0; i < WIDTH; i++) if (!dr_is_spacer(sum[i])) return 1'b0;
    return dr_is_spacer(cout);
  endfunction

  function automatic logic any_data();
    for (int i = 0; i < WIDTH; i++) if (dr_is_data(sum[i])) return 1'b1;
    return dr_is_data(cout);
  endfunction

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("%0t: %s", $time, msg);
  endtask

  task automatic shuffle(ref int order[], input int n);
    order = new[n];
    for (int i = 0; i < n; i++) order[i] = i;
    for (int i = n-1; i > 0; i--) begin
      int j, t;
      j = $urandom_range(0, i);
      t = order[i]; order[i] = order[j]; order[j] = t;
    end
  endtask

  // ---- monitor: output code words are legal and never wrong ----
  initial begin
    #2;
    forever begin
      dr_t [WIDTH:0] got;
      logic [WIDTH:0] exp_v;
      #1;
      got = {cout, sum};
      checks++;
      for (int i = 0; i <= WIDTH; i++) begin
        if (dr_is_illegal(got[i])) begin fail($sformatf("illegal code on output %0d", i)); break; end
        if (dr_is_data(got[i])) begin
          if (expected_q.size() == 0) begin fail("output data with no word outstanding"); break; end
          exp_v = expected_q[0];
          if (got[i] != dr_encode(exp_v[i])) begin fail($sformatf("output %0d wrong", i)); break; end
        end
      end
    end
  end

  // ---- sender ----
  task automatic send(input logic [WIDTH-1:0] va, input logic [WIDTH-1:0] vb, input logic vc);
    int order[];
    wait (ackout == 1'b0);
    #1;
    expected_q.push_back({1'b0, va} + {1'b0, vb} + (WIDTH+1)'(vc));
    shuffle(order, 2*WIDTH);
    for (int k = 0; k < 2*WIDTH; k++) begin
      int p;
      p = order[k];
      if (p < WIDTH) a[p] = dr_encode(va[p]);
      else           b[p-WIDTH] = dr_encode(vb[p-WIDTH]);
      if ($urandom_range(0, 7) == 0) #1;
    end
    #2;
    checks++;
    if (ackout) fail("ackout rose before the carry input arrived");
    else        cd_wait++;
    if (any_data() && !rx_ackout) early_set++;
    cin = dr_encode(vc);
    #1;
    if (!ackout && rx_stalling) stall++;
    wait (ackout == 1'b1);
    checks++;
    if (acked < sent) fail($sformatf("word %0d accepted before word %0d was acknowledged", sent, sent-1));
    sent++;
    #($urandom_range(0, 2));
    shuffle(order, 2*WIDTH);
    for (int k = 0; k < 2*WIDTH; k++) begin
      int p;
      p = order[k];
      if (p < WIDTH) a[p] = DR_SPACER;
      else           b[p-WIDTH] = DR_SPACER;
      if ($urandom_range(0, 7) == 0) #1;
    end
    #2;
    if (rx_ackout && dr_is_spacer(cout) && dr_is_data(cin)) early_reset++;
    cin = DR_SPACER;
  endtask

  initial begin
    rst_n = 1'b0;
    a = '0; b = '0; cin = DR_SPACER;
    rx_ackout = 1'b0;
    #2;
    rst_n = 1'b1;
    #1;
    checks++;
    if (ackout || !all_spacer()) fail("stage not empty after clear");

    send(32'hAAAA_AAAA, 32'h5555_5555, 1'b1);
    send(32'hFFFF_FFFF, 32'hFFFF_FFFF, 1'b1);
    send(32'h0000_0000, 32'h0000_0000, 1'b0);
    for (int v = 0; v < NUM_VEC; v++)
      send(WIDTH'($urandom), WIDTH'($urandom), 1'($urandom_range(0, 1)));
    done_tx = 1'b1;
  end

  // ---- receiver ----
  initial begin
    logic [WIDTH:0] exp_v;
    wait (rst_n == 1'b1);
    #1;
    forever begin
      wait (out_all_data);
      #1;
      checks++;
      exp_v = expected_q[0];
      if ({cout, sum} != {dr_encode(exp_v[WIDTH]), dr_encode_vec(exp_v[WIDTH-1:0])})
        fail($sformatf("result %0d wrong", received));
      received++;
      if ($urandom_range(0, 9) == 0) begin
        rx_stalling = 1'b1;
        #(40 + $urandom_range(0, 40));
        rx_stalling = 1'b0;
      end else begin
        #($urandom_range(0, 3));
      end
      rx_ackout = 1'b1;
      acked++;
      wait (out_all_spacer);
      void'(expected_q.pop_front());
      #($urandom_range(0, 2));
      rx_ackout = 1'b0;
      if (done_tx && expected_q.size() == 0) break;
    end
    #5;
    checks++;
    if (received != NUM_VEC + 3) fail($sformatf("received %0d results", received));
    checks++;
    if (early_set == 0)   fail("early set never observed");
    checks++;
    if (early_reset == 0) fail("early reset never observed");
    checks++;
    if (cd_wait == 0)     fail("completion detection never observed");
    checks++;
    if (stall == 0)       fail("receiver stall never observed");
    $display("words=%0d early_set=%0d early_reset=%0d cd_wait=%0d stall=%0d",
             received, early_set, early_reset, cd_wait, stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic dr_t [WIDTH-1:0] dr_encode_vec(input logic [WIDTH-1:0] v);
    dr_t [WIDTH-1:0] r;
    for (int i = 0; i < WIDTH; i++) r[i] = dr_encode(v[i]);
    return r;
  endfunction

endmodule
