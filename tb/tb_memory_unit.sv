// tb_memory_unit: self-checking test of the register exchange between the
// 250 MHz and 5 MHz loops.
//
// Fast -> slow: the count input changes at random times (sometimes every
// fast clock, sometimes held for microseconds). Every count that appears in
// the slow domain must be a value the input actually held, no older than
// MAX_AGE_NS, and after the input has been held still the slow copy must
// equal it.
// Slow -> fast: a controller word is sent every fourth slow clock, as the
// controller does at 1.25 MHz. Each must arrive exactly once, in order, and
// within one slow clock plus five fast clocks.
module tb_memory_unit;
  import irc_pkg::*;

  localparam time TF = 4ns;        // 250 MHz
  localparam time TS = 200ns;      // 5 MHz
  localparam time MAX_AGE_NS = 1200ns;

  logic clk_fast = 1'b0, clk_slow = 1'b0;
  logic rst_fast_n = 1'b0, rst_slow_n = 1'b0;
  count_t count_fast = '0, count_slow;
  logic count_slow_valid;
  sig_t ctrl_slow = '0, ctrl_fast;
  logic ctrl_slow_valid = 1'b0, ctrl_fast_valid;
  int checks = 0, failures = 0;

  always #(TF/2) clk_fast = ~clk_fast;
  initial begin #1ns; forever #(TS/2) clk_slow = ~clk_slow; end

  memory_unit dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // history of count values: value -> last time it was on the input
  time last_seen [int];
  always @(posedge clk_fast) if (rst_fast_n) last_seen[int'(count_fast)] = $time;

  int n_count_xfers = 0;
  always @(posedge clk_slow) begin
    if (rst_slow_n && count_slow_valid) begin
      n_count_xfers++;
      check("count was presented", last_seen.exists(int'(count_slow)));
      if (last_seen.exists(int'(count_slow)))
        check("count age", $time - last_seen[int'(count_slow)] <= MAX_AGE_NS);
    end
  end

  // controller words
  sig_t sent_q[$];
  time  sent_t[$];
  int   n_ctrl_rx = 0;
  always @(posedge clk_fast) begin
    if (rst_fast_n && ctrl_fast_valid) begin
      n_ctrl_rx++;
      check("ctrl word expected", sent_q.size() > 0);
      if (sent_q.size() > 0) begin
        sig_t e;
        time  t;
        e = sent_q.pop_front();
        t = sent_t.pop_front();
        check("ctrl word value", ctrl_fast == e);
        if (ctrl_fast != e) $display("got %h exp %h sent %0t now %0t q=%0d", ctrl_fast, e, t, $time, sent_q.size());
        check("ctrl latency", $time - t <= TS + 5*TF);
      end
    end
  end

  initial begin : watchdog
    #5ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // slow side: a word every 4 slow clocks
  initial begin
    #(5*TS);
    @(negedge clk_slow) rst_slow_n = 1'b1;
    forever begin
      repeat (3) @(negedge clk_slow);
      @(negedge clk_slow);
      ctrl_slow       = sig_t'($urandom);
      ctrl_slow_valid = 1'b1;
      @(posedge clk_slow);
      sent_q.push_back(ctrl_slow);
      sent_t.push_back($time);
      @(negedge clk_slow) ctrl_slow_valid = 1'b0;
    end
  end

  initial begin
    #(5*TS);
    @(negedge clk_fast) rst_fast_n = 1'b1;
    for (int burst = 0; burst < 200; burst++) begin
      int mode = $urandom_range(0, 2);
      if (mode == 0) begin
        // fast-changing input
        repeat ($urandom_range(10, 400)) @(negedge clk_fast) count_fast = count_fast + count_t'($urandom_range(0, 2) - 1);
      end else begin
        // hold still, then the slow copy must match
        @(negedge clk_fast) count_fast = count_t'($urandom);
        #(MAX_AGE_NS + TS);
        @(posedge clk_slow); #1;
        check("held count reached slow side", count_slow == count_fast);
      end
    end
    check("count transfers happened", n_count_xfers > 100);
    check("ctrl words arrived", n_ctrl_rx > 100 && sent_q.size() <= 1);
    $display("count transfers=%0d ctrl words=%0d", n_count_xfers, n_ctrl_rx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
