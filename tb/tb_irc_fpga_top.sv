// tb_irc_fpga_top: end-to-end test of the IRC FPGA datapath, closed around
// a model of the nanopositioner, with every parameter at its default.
//
// Models in this bench (not part of the design):
//   * plant: one lightly damped mode, 14.86 kHz, damping ratio 0.01, DC gain
//     KP = 1 um per volt of DAC output (below the stability bound 3 that
//     D = -3 allows), integrated every 4 ns;
//   * DAC: v = code / 2^15 volts;
//   * encoder: the plant position quantised to 6 nm counts and played out as
//     AquadB levels, at most one quarter step per 250 MHz clock;
//   * a step disturbance added at the plant input.
// Checks:
//   * the step count follows the encoder (up and down), and the encoder
//     reset written by the host zeroes it;
//   * every controller output is bit-exact with an integer model of
//     y~ = x~ + Gamma (u~ + D x~), u~ = r + y, using a position value the
//     slow loop held in the last few cycles, and the gains the host wrote;
//   * controller outputs come exactly every 800 ns (1.25 MHz);
//   * every DAC update equals the rounded, clipped last controller output
//     and arrives within one slow clock plus six fast clocks;
//   * damping: after the same disturbance step, the residual vibration of
//     the closed loop is at least 3x (about 10 dB) smaller than open loop,
//     and the closed-loop position settles to KP d / (1 - KP F(1)) with
//     F(1) = 1/3;
//   * each mechanism is seen at least once: count up, count down, encoder
//     reset, count and controller transfers, controller updates, host gain
//     writes, DAC clipping.
module tb_irc_fpga_top;
  import irc_pkg::*;

  localparam real KP   = 1.0;            // plant DC gain, um/V
  localparam real FRES = 14.86e3;        // Hz
  localparam real ZETA = 0.01;
  localparam real DT   = 4.0e-9;         // s, one fast clock
  localparam real PI   = 3.14159265358979;

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
  int n_up = 0, n_down = 0, n_enc_reset = 0, n_ctrl = 0, n_dac = 0, n_clip = 0, n_gain_wr = 0, n_pos_upd = 0;

  always #2 clk_fast = ~clk_fast;
  always #100 clk_slow = ~clk_slow;     // derived 5 MHz, edge-aligned

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

  initial begin : watchdog
    #6ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- plant, DAC and encoder models ----------------
  real pos = 0.0, vel = 0.0;    // um, um/s
  real dist_v = 0.0;              // V, disturbance at the plant input
  bit  closed = 1'b0;           // DAC drives the plant
  int  enc = 0;                 // quarter steps played out so far
  int  enc_target;

  always @(posedge clk_fast) begin
    real w, v_in, acc;
    w    = 2.0 * PI * FRES;
    v_in = dist_v + (closed ? real'($signed(dac_code)) / 32768.0 : 0.0);
    acc  = w * w * (KP * v_in - pos) - 2.0 * ZETA * w * vel;
    vel  = vel + acc * DT;
    pos  = pos + vel * DT;
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

  // ---------------- step count tracking ----------------
  int enc_off = 0;              // encoder position when the count was zeroed
  int enc_d1 = 0, enc_d2 = 0;   // encoder delayed: the decoder sees it one clock late
  bit count_track = 1'b0;
  count_t cnt_prev = '0;
  always @(posedge clk_fast) begin
    #1;
    if (count_track) begin
      check("step count follows encoder", step_count == count_t'(enc_d1 - enc_off));
      if (step_count == cnt_prev + count_t'(1)) n_up++;
      if (step_count == cnt_prev - count_t'(1)) n_down++;
    end
    cnt_prev = step_count;
    enc_d1 = enc;
  end

  // ---------------- controller model ----------------
  longint mx = 0;
  sig_t   ref_sh = '0;
  coef_t  g_sh = GAMMA_DEFAULT, d_sh = D_DEFAULT;
  sig_t   pos_hist [0:5];
  time    t_last_ctrl = 0;
  sig_t   last_ctrl = '0;
  time    t_ctrl = 0;
  logic   dac_pending = 1'b0;

  function automatic longint sat32(input longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction
  function automatic longint rnd20(input longint p);
    longint q;
    q = p + 64'sd524288;
    return (q >= 0) ? q / 64'sd1048576 : -((-q + 64'sd1048575) / 64'sd1048576);
  endfunction
  function automatic longint irc_model(input longint x, input longint u);
    longint t;
    t = sat32(u + sat32(rnd20(longint'(d_sh) * x)));
    return sat32(x + sat32(rnd20(longint'(g_sh) * t)));
  endfunction

  sig_t pos_prev = '0;
  always @(posedge clk_slow) begin
    #1;
    if (rst_n) begin
      if (ctrl_valid) begin
        bit found;
        found = 1'b0;
        for (int i = 0; i < 6; i++)
          if (irc_model(mx, sat32(longint'(ref_sh) + longint'(pos_hist[i]))) == longint'(ctrl_out)) found = 1'b1;
        check("controller output bit-exact", found);
        if (n_ctrl > 0) check("controller rate 1.25 MHz", $time - t_last_ctrl == 800);
        t_last_ctrl = $time;
        mx = longint'(ctrl_out);
        last_ctrl = ctrl_out;
        t_ctrl = $time;
        dac_pending = 1'b1;
        n_ctrl++;
      end
      if (position_um != pos_prev) n_pos_upd++;
      pos_prev = position_um;
      for (int i = 5; i > 0; i--) pos_hist[i] = pos_hist[i-1];
      pos_hist[0] = position_um;
    end
  end

  // ---------------- DAC check ----------------
  always @(posedge clk_fast) begin
    #1;
    if (rst_n && dac_update) begin
      int expd;
      expd = $rtoi(real'(last_ctrl) / 2.0 + 2.0e9 + 0.5) - 2000000000;  // round(v * 2^15), half up
      if (expd > 32767) expd = 32767;
      if (expd < -32768) expd = -32768;
      check("DAC code", $signed(dac_code) == 16'(expd));
      check("DAC clip flag", dac_clipped == (real'(last_ctrl) / 2.0 >= 32767.5 || real'(last_ctrl) / 2.0 < -32768.5));
      check("DAC latency", dac_pending && ($time - t_ctrl) <= 200 + 6*4);
      dac_pending = 1'b0;
      if (dac_clipped) n_clip++;
      n_dac++;
    end
  end

  // ---------------- host access ----------------
  task automatic host_write(input logic [1:0] a, input logic [31:0] d);
    // write right after a controller output, so no update is in flight
    do begin
      @(posedge clk_slow);
      #1;
    end while (!ctrl_valid);
    @(negedge clk_slow);
    host_wr_en = 1'b1; host_wr_addr = a; host_wr_data = d;
    @(negedge clk_slow);
    host_wr_en = 1'b0;
    case (a)
      2'd0: ref_sh = sig_t'(d);
      2'd1: begin g_sh = coef_t'(d[23:0]); n_gain_wr++; end
      2'd2: begin d_sh = coef_t'(d[23:0]); n_gain_wr++; end
      default: ;
    endcase
  endtask

  // encoder reset: zero the count at the current encoder position
  task automatic encoder_reset();
    count_track = 1'b0;
    host_write(2'd3, 32'd1);
    repeat (2) @(negedge clk_slow);
    enc_off = enc;
    host_write(2'd3, 32'd0);
    // hold the plant still while the reset takes effect
    repeat (2) @(negedge clk_slow);
    enc_off = enc_d1 - int'(step_count);
    check("encoder reset zeroes the count", absr(real'(step_count)) <= 2.0);
    n_enc_reset++;
    @(negedge clk_fast);
    count_track = 1'b1;
  endtask

  // ring measurement: largest |pos - final| between 0.3 and 0.8 ms after a step
  task automatic ring(output real resid, output real final_pos);
    real mx_dev, s;
    real samples[$];
    #300us;
    samples.delete();
    repeat (500) begin #1us; samples.push_back(pos); end
    s = 0.0;
    foreach (samples[i]) s += samples[i];
    final_pos = s / real'(samples.size());
    mx_dev = 0.0;
    foreach (samples[i]) if (absr(samples[i] - final_pos) > mx_dev) mx_dev = absr(samples[i] - final_pos);
    resid = mx_dev;
  endtask

  initial begin
    real r_open, r_closed, f_open, f_closed;
    foreach (pos_hist[i]) pos_hist[i] = '0;
    #1us;
    rst_n = 1'b1;
    #2us;
    check("count held at zero after reset", step_count == 0);
    // the host enables counting
    encoder_reset();

    // ---- open loop: disturbance step, the DAC is not connected ----
    #5us;
    dist_v = 0.5;
    ring(r_open, f_open);
    $display("open loop  : residual vibration %f um, mean %f um", r_open, f_open);
    check("open loop settles near KP*d", absr(f_open - 0.5) < 0.05);

    // back to rest, quickly and the hard way
    dist_v = 0.0;
    pos = 0.0; vel = 0.0;
    #2us;
    encoder_reset();
    closed = 1'b1;
    #300us;                 // controller state settles with the loop closed

    // ---- closed loop: same step ----
    dist_v = 0.5;
    ring(r_closed, f_closed);
    $display("closed loop: residual vibration %f um, mean %f um", r_closed, f_closed);
    check("closed loop damps at least 3x", r_closed * 3.0 < r_open);
    check("closed loop DC level KP d/(1 - KP/3)", absr(f_closed - 0.75) < 0.05);
    $display("damping of the residual vibration: %f dB", 20.0 * $ln(r_open / r_closed) / $ln(10.0));

    // ---- host retunes the gains: D = -2.5, Gamma = 0.02 ----
    host_write(2'd2, 32'(-2621440));
    host_write(2'd1, 32'(20972));
    #100us;
    host_write(2'd2, 32'(D_DEFAULT));
    host_write(2'd1, 32'(GAMMA_DEFAULT));

    // ---- large reference with the loop open: the DAC clips ----
    closed = 1'b0;
    host_write(2'd0, 32'(200 * 65536));      // r = 200 um
    #20us;
    host_write(2'd0, 32'd0);
    #60us;

    check("mechanism: count up", n_up > 0);
    check("mechanism: count down", n_down > 0);
    check("mechanism: encoder reset", n_enc_reset >= 2);
    check("mechanism: count transfers", n_pos_upd > 0);
    check("mechanism: controller updates", n_ctrl > 1000);
    check("mechanism: controller-to-DAC transfers", n_dac > 1000);
    check("mechanism: gain writes", n_gain_wr >= 4);
    check("mechanism: DAC clipping", n_clip > 0);
    $display("up=%0d down=%0d enc_resets=%0d pos_updates=%0d ctrl=%0d dac=%0d gain_writes=%0d clipped=%0d",
             n_up, n_down, n_enc_reset, n_pos_upd, n_ctrl, n_dac, n_gain_wr, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
