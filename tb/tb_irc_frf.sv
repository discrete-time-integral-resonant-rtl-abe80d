// tb_irc_frf: frequency response of the damped stage, open loop against
// closed loop, at the design's default parameters.
//
// The same stage, DAC and encoder models as tb_irc_fpga_top (one mode at
// 14.86 kHz, damping ratio 0.01, 1 um/V; 6 nm AquadB encoder) are driven by a
// sinusoidal disturbance at the plant input. For each test frequency the
// bench lets the response settle, then measures the amplitude and phase of
// the stage position with a lock-in (correlation with sin and cos over whole
// periods), once with the DAC disconnected and once with the IRC loop
// closed. It checks:
//   * open loop: the measured gain matches the model's analytic gain
//     (within 1 dB), so the measurement itself is sound;
//   * closed loop: the resonance peak drops by at least 10 dB, and no test
//     frequency is amplified by more than 6 dB over open loop;
//   * the controller keeps producing outputs at 1.25 MHz throughout.
module tb_irc_frf;
  import irc_pkg::*;

  localparam real KP   = 1.0;
  localparam real FRES = 14.86e3;
  localparam real ZETA = 0.01;
  localparam real DT   = 4.0e-9;
  localparam real PI   = 3.14159265358979;
  localparam real AMP  = 0.05;           // V, disturbance amplitude
  localparam int  NF   = 7;
  localparam real FREQ [NF] = '{5.0e3, 10.0e3, 13.5e3, 14.86e3, 16.5e3, 20.0e3, 30.0e3};

  logic clk_fast = 1'b0, clk_slow = 1'b0, rst_n = 1'b0;
  logic quad_a = 1'b0, quad_b = 1'b0;
  logic host_wr_en = 1'b0;
  logic [1:0] host_wr_addr = '0;
  logic [31:0] host_wr_data = '0;
  logic [15:0] dac_code;
  logic dac_update, dac_clipped;
  count_t step_count;
  sig_t position_um, ctrl_out;
  logic ctrl_valid;
  int checks = 0, failures = 0;

  always #2 clk_fast = ~clk_fast;
  always #100 clk_slow = ~clk_slow;

  irc_fpga_top dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic real db(input real v);
    return 20.0 * $ln(v) / $ln(10.0);
  endfunction

  initial begin : watchdog
    #200ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stage, DAC and encoder models ----------------
  real pos = 0.0, vel = 0.0, tsec = 0.0, f_exc = 0.0;
  bit  closed = 1'b0, excite = 1'b0;
  int  enc = 0, enc_target;
  // lock-in accumulators
  bit  acc_on = 1'b0;
  real acc_i = 0.0, acc_q = 0.0;
  int  acc_n = 0;

  always @(posedge clk_fast) begin
    real w, v_in, acc, d;
    w    = 2.0 * PI * FRES;
    tsec = tsec + DT;
    d    = excite ? AMP * $sin(2.0 * PI * f_exc * tsec) : 0.0;
    v_in = d + (closed ? real'($signed(dac_code)) / 32768.0 : 0.0);
    acc  = w * w * (KP * v_in - pos) - 2.0 * ZETA * w * vel;
    vel  = vel + acc * DT;
    pos  = pos + vel * DT;
    if (acc_on) begin
      // the measured position (encoder count x 6 nm) is what is analysed
      acc_i = acc_i + real'(enc) * 0.006 * $sin(2.0 * PI * f_exc * tsec);
      acc_q = acc_q + real'(enc) * 0.006 * $cos(2.0 * PI * f_exc * tsec);
      acc_n++;
    end
    enc_target = int'($floor(pos / 0.006));
    if (enc_target > enc) enc++;
    else if (enc_target < enc) enc--;
    case (enc & 3)
      0: {quad_a, quad_b} <= 2'b00;
      1: {quad_a, quad_b} <= 2'b10;
      2: {quad_a, quad_b} <= 2'b11;
      default: {quad_a, quad_b} <= 2'b01;
    endcase
  end

  int n_ctrl = 0;
  time t_last = 0;
  always @(posedge clk_slow) begin
    #1;
    if (rst_n && ctrl_valid) begin
      if (n_ctrl > 0) check("controller rate 1.25 MHz", $time - t_last == 800);
      t_last = $time;
      n_ctrl++;
    end
  end

  // one measurement: settle, then whole periods of lock-in; gain in um/V
  task automatic measure(input real f, input bit cl, output real gain);
    int nper, ncyc;
    closed = cl;
    f_exc  = f;
    excite = 1'b1;
    #5ms;
    nper = int'(2.0e-3 * f);                       // about 2 ms of whole periods
    ncyc = int'(real'(nper) / f / DT);
    acc_i = 0.0; acc_q = 0.0; acc_n = 0;
    @(posedge clk_fast);
    acc_on = 1'b1;
    repeat (ncyc) @(posedge clk_fast);
    acc_on = 1'b0;
    gain = 2.0 * $sqrt(acc_i * acc_i + acc_q * acc_q) / real'(acc_n) / AMP;
    // back to rest for the next run
    excite = 1'b0;
    closed = 1'b0;
    pos = 0.0; vel = 0.0;
    #50us;
  endtask

  initial begin
    real g_open [NF], g_closed [NF];
    real peak_open, peak_closed, r, ideal;
    #1us;
    rst_n = 1'b1;
    #2us;
    // enable counting (clear the encoder reset)
    @(negedge clk_slow);
    host_wr_en = 1'b1; host_wr_addr = 2'd3; host_wr_data = 32'd0;
    @(negedge clk_slow);
    host_wr_en = 1'b0;
    #2us;

    peak_open = 0.0; peak_closed = 0.0;
    $display("   f [kHz]   open [dB]  closed [dB]  model open [dB]");
    for (int i = 0; i < NF; i++) begin
      measure(FREQ[i], 1'b0, g_open[i]);
      measure(FREQ[i], 1'b1, g_closed[i]);
      r = FREQ[i] / FRES;
      ideal = KP / $sqrt((1.0 - r * r) * (1.0 - r * r) + (2.0 * ZETA * r) * (2.0 * ZETA * r));
      $display("  %8.2f   %8.2f    %8.2f      %8.2f", FREQ[i] / 1.0e3, db(g_open[i]), db(g_closed[i]), db(ideal));
      check("open-loop gain matches the model", absr(db(g_open[i]) - db(ideal)) < 1.0);
      check("no frequency amplified by more than 6 dB", db(g_closed[i]) - db(g_open[i]) < 6.0);
      if (g_open[i] > peak_open) peak_open = g_open[i];
      if (g_closed[i] > peak_closed) peak_closed = g_closed[i];
    end
    $display("resonance peak: open %0.2f dB, closed %0.2f dB, reduction %0.2f dB",
             db(peak_open), db(peak_closed), db(peak_open) - db(peak_closed));
    check("resonance damped by at least 10 dB", db(peak_open) - db(peak_closed) >= 10.0);
    check("controller ran", n_ctrl > 10000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
