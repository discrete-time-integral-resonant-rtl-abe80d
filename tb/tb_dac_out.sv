// tb_dac_out: checks the DAC code against round(v / 1 V * 2^15), clipped to
// the 16-bit range, computed here in real arithmetic; the clipped flag; the
// one-clock latency of dac_update; and that the code holds between updates.
module tb_dac_out;
  import irc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  sig_t ctrl = '0;
  logic ctrl_valid = 1'b0;
  logic [15:0] dac_code;
  logic dac_update, clipped;
  int checks = 0, failures = 0, n_clip = 0;

  always #2 clk = ~clk;

  dac_out dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: ctrl=%0d code=%0d", what, $time, ctrl, $signed(dac_code));
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
    real v, c;
    int expd;
    logic exp_clip;
    logic [15:0] held;
    repeat (3) @(posedge clk);
    #1 check("reset code", dac_code == 16'd0);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      if (i % 4 == 0) ctrl = sig_t'($urandom);                                // anywhere
      else ctrl = sig_t'($signed($urandom_range(0, 163840)) - 81920);        // +-1.25 V
      if (i == 1) ctrl = sig_t'(65536);       // +1 V: just clips
      if (i == 2) ctrl = sig_t'(-65536);      // -1 V: -32768, no clip
      if (i == 3) ctrl = sig_t'(1);           // rounds half up to 1
      ctrl_valid = 1'b1;
      v = real'(ctrl) / 65536.0;              // volts
      c = v * 32768.0;
      expd = $rtoi(c + 32768.5) - 32768;      // round half up
      exp_clip = 1'b0;
      if (expd > 32767)  begin expd = 32767;  exp_clip = 1'b1; end
      if (expd < -32768) begin expd = -32768; exp_clip = 1'b1; end
      if (exp_clip) n_clip++;
      @(posedge clk); #1;
      check("update", dac_update);
      check("code", $signed(dac_code) == 16'(expd));
      check("clip flag", clipped == exp_clip);
      held = dac_code;
      @(negedge clk) ctrl_valid = 1'b0;
      ctrl = sig_t'($urandom);
      @(posedge clk); #1;
      check("no update", !dac_update);
      check("hold", dac_code == held);
    end
    check("clipping exercised", n_clip > 100);
    $display("clipped=%0d", n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
