// tb_reference_sum: checks u_k = r + y_k with saturation, computed here in
// 64-bit arithmetic; u_valid one clock after the strobe; u_k held between
// strobes while the inputs keep changing.
module tb_reference_sum;
  import irc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, sample = 1'b0;
  sig_t ref_um = '0, position = '0, u_k;
  logic u_valid;
  int checks = 0, failures = 0, n_sat = 0;

  always #100 clk = ~clk;

  reference_sum dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s;
    sig_t expd;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if (i % 3 == 0) begin       // full-range values, saturation likely
        ref_um = sig_t'($urandom); position = sig_t'($urandom);
      end else begin              // realistic values, +-200 um
        ref_um = sig_t'($signed($urandom_range(0, 26214400)) - 13107200);
        position = sig_t'($signed($urandom_range(0, 26214400)) - 13107200);
      end
      sample = 1'b1;
      s = longint'(ref_um) + longint'(position);
      if (s > 64'sh7fffffff) begin expd = SIG_MAX; n_sat++; end
      else if (s < -64'sh80000000) begin expd = SIG_MIN; n_sat++; end
      else expd = sig_t'(s);
      @(posedge clk); #1;
      check("valid", u_valid);
      check("sum", u_k == expd);
      @(negedge clk) sample = 1'b0;
      ref_um = sig_t'($urandom);
      @(posedge clk); #1;
      check("no valid", !u_valid);
      check("held", u_k == expd);
    end
    check("saturation exercised", n_sat > 100);
    $display("saturated=%0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
