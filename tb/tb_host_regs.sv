// tb_host_regs: reset values (Gamma = 0.010, D = -3 in Q3.20, r = 0,
// encoder reset set) and random writes to every register, checked against
// a shadow copy kept here.
module tb_host_regs;
  import irc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0;
  logic [1:0] wr_addr = '0;
  logic [31:0] wr_data = '0;
  sig_t ref_um;
  coef_t gamma, d_gain;
  logic enc_reset;
  int checks = 0, failures = 0;

  always #100 clk = ~clk;

  host_regs dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] sh_ref;
    logic [23:0] sh_g, sh_d;
    logic sh_rst;
    repeat (3) @(posedge clk);
    #1;
    check("gamma default 0.010", gamma == 24'sd10486);
    check("gamma default value", absr(real'(gamma) / 1048576.0 - 0.010) < 1e-6);
    check("D default -3", real'(d_gain) / 1048576.0 == -3.0);
    check("ref default", ref_um == 0);
    check("enc reset default", enc_reset);
    sh_ref = 0; sh_g = 24'(gamma); sh_d = 24'(d_gain); sh_rst = 1'b1;
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      wr_en   = ($urandom_range(0, 3) != 0);
      wr_addr = 2'($urandom);
      wr_data = $urandom;
      if (wr_en) case (wr_addr)
        2'd0: sh_ref = wr_data;
        2'd1: sh_g = wr_data[23:0];
        2'd2: sh_d = wr_data[23:0];
        default: sh_rst = wr_data[0];
      endcase
      @(posedge clk); #1;
      check("ref", ref_um == sh_ref);
      check("gamma", gamma == sh_g);
      check("d", d_gain == sh_d);
      check("enc_reset", enc_reset == sh_rst);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
