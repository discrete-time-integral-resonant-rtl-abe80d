// tb_position_scaler: checks the count-to-micrometre conversion against the
// exact value count * 6 nm, computed here in real arithmetic. The allowed
// error is half an output LSB plus the scale factor's quantisation
// (|count| * 2^-24 * 2^16 LSB at most). Also checks the one-clock latency of
// pos_valid and that the output holds while count_valid is low.
module tb_position_scaler;
  import irc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  count_t count = '0;
  logic count_valid = 1'b0;
  sig_t pos_um;
  logic pos_valid;
  int checks = 0, failures = 0;

  always #100 clk = ~clk;

  position_scaler dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: count=%0d pos=%0d", what, $time, count, pos_um);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real exp_lsb, tol;
    sig_t held;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      case (i)
        0: count = 16'sh7fff;
        1: count = 16'sh8000;
        2: count = 0;
        3: count = 1;
        4: count = -1;
        default: count = count_t'($urandom);
      endcase
      count_valid = 1'b1;
      @(posedge clk); #1;
      exp_lsb = real'(count) * 0.006 * 65536.0;       // 6 nm = 0.006 um
      tol     = 0.5 + (real'(count) < 0 ? -real'(count) : real'(count)) / 256.0 + 0.01;
      check("valid", pos_valid);
      check("value", (real'(pos_um) - exp_lsb) <= tol && (exp_lsb - real'(pos_um)) <= tol);
      if (i == 3) check("one count = 6 nm", pos_um == sig_t'(393));   // 0.006*65536 = 393.2
      // hold
      held = pos_um;
      @(negedge clk) count_valid = 1'b0;
      count = count_t'($urandom);
      @(posedge clk); #1;
      check("no valid", !pos_valid);
      check("holds", pos_um == held);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
