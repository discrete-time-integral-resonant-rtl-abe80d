// tb_sample_timer: the sample strobe must be a single-cycle pulse exactly
// every DIV = 4 loop clocks (5 MHz / 4 = 1.25 MHz), starting in the first
// clock after reset, and must be low during reset.
module tb_sample_timer;
  logic clk = 1'b0, rst_n = 1'b0;
  logic sample;
  int checks = 0, failures = 0;

  always #100 clk = ~clk;     // 5 MHz

  sample_timer dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
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
    int n = 0;
    time t_last = 0;
    repeat (3) begin @(posedge clk); #1 check("low in reset", !sample); end
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 40000; c++) begin
      #1;
      check("pattern", sample == ((c % 4) == 0));
      if (sample) begin
        if (n > 0) check("period 800 ns (1.25 MHz)", $time - t_last == 800);
        t_last = $time;
        n++;
      end
      @(negedge clk);
    end
    check("strobe count", n == 10000);
    $display("strobes=%0d", n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
