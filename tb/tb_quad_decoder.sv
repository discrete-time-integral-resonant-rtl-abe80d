// tb_quad_decoder: self-checking test of the quadrature decoder.
//
// The encoder is modelled as a position p on a line of quarter-period
// states; state p mod 4 maps to (A,B) = 00, 10, 11, 01, so a rising p means
// A leads B. The test walks p randomly (steps of -1, 0, +1, random dwell),
// then runs long monotone sweeps past the 16-bit wrap, and checks after every
// clock that step_count equals p (mod 2^16) one cycle after the new levels
// were applied, and that step_up/step_down flag each step. It also checks
// that Reset zeroes the count, including a step taken in the same cycle.
module tb_quad_decoder;
  import irc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic quad_a = 1'b0, quad_b = 1'b0, cnt_reset = 1'b0;
  count_t step_count;
  logic step_up, step_down;
  int checks = 0, failures = 0;
  int p = 0;                      // encoder position in quarter periods
  int off = 0;                    // position at which the count was zeroed
  int n_up = 0, n_down = 0;

  always #2 clk = ~clk;

  quad_decoder dut (.*);

  function automatic logic [1:0] ab_of(input int pos);
    case (pos & 3)
      0: return 2'b00;
      1: return 2'b10;
      2: return 2'b11;
      default: return 2'b01;
    endcase
  endfunction

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: count=%0d p=%0d", what, $time, step_count, p);
    end
  endtask

  // apply a step (-1, 0, +1) on the falling edge, check after the next rise
  task automatic step(input int dir);
    @(negedge clk);
    p += dir;
    {quad_a, quad_b} = ab_of(p);
    @(posedge clk); #1;
    check("count", step_count == count_t'(p - off));
    check("flags", step_up == (dir == 1) && step_down == (dir == -1));
    if (dir == 1) n_up++;
    if (dir == -1) n_down++;
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(posedge clk); #1;
    check("reset value", step_count == 0);

    // random walk
    for (int i = 0; i < 20000; i++) begin
      int r = $urandom_range(0, 2);
      step(r - 1);
    end
    // long sweep up, past +32767
    for (int i = 0; i < 70000; i++) step(1);
    // and down again, past -32768
    for (int i = 0; i < 140000; i++) step(-1);

    // Reset clears the count
    @(negedge clk) cnt_reset = 1'b1;
    @(posedge clk); #1;
    off = p;
    check("reset clears", step_count == 0);
    // a step while Reset is held is counted from zero
    @(negedge clk);
    p = p + 1;
    {quad_a, quad_b} = ab_of(p);
    @(posedge clk); #1;
    check("step during reset", step_count == 1);
    @(negedge clk);
    @(posedge clk); #1;
    check("reset holds zero", step_count == 0);
    off = p;
    @(negedge clk) cnt_reset = 1'b0;
    @(posedge clk); #1;
    check("released, no step", step_count == 0);
    for (int i = 0; i < 100; i++) step(1);
    for (int i = 0; i < 50; i++) step(-1);
    check("count after reset", step_count == 50);

    check("both directions seen", n_up > 0 && n_down > 0);
    $display("up steps=%0d down steps=%0d", n_up, n_down);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
