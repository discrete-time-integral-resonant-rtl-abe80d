// tb_irc_controller: checks the discrete-time IRC
//     y~_k = (1 + Gamma D) x~_k + Gamma u~_k ,  x~_{k+1} = y~_k
// in three ways:
//  1. bit-exact against an integer model written here (the rounding and
//     saturation rules stated in the design: products rounded to nearest,
//     ties up, every sum saturated), with random inputs and the published
//     gains Gamma = 0.010, D = -3;
//  2. against a real-valued model of the same equation: the fixed-point
//     output must stay within 0.001 um of it;
//  3. DC behaviour: a constant input u gives y -> -u/D = u/3, the DC gain
//     F(1) = Gamma / (-Gamma D) of the controller.
// It also checks the two-clock latency of y_valid, busy, and that a
// deliberately unstable gain (D > 0) saturates instead of wrapping.
// A second instance with P = 2 runs the multivariable form with full 2x2
// gain matrices (Gamma > 0, -2 Gamma^-1 < D < 0, with cross terms), checked
// bit-exact against a matrix integer model and within 0.001 um of a
// real-valued model; its output must decay to zero once the input is
// removed, as the controller alone is stable.
module tb_irc_controller;
  import irc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  sig_t u_k = '0, y_k;
  coef_t gamma = GAMMA_DEFAULT, d_gain = D_DEFAULT;
  logic y_valid, busy;
  int checks = 0, failures = 0, n_sat = 0, n_upd = 0;

  always #100 clk = ~clk;

  sig_t  u_a [1], y_a [1];
  coef_t g_a [1][1], d_a [1][1];
  assign u_a[0] = u_k;
  assign g_a[0][0] = gamma;
  assign d_a[0][0] = d_gain;
  assign y_k = y_a[0];

  irc_controller dut (
    .clk(clk), .rst_n(rst_n), .start(start), .u_k(u_a), .gamma(g_a), .d_gain(d_a),
    .y_k(y_a), .y_valid(y_valid), .busy(busy)
  );

  // two-channel instance
  logic  start2 = 1'b0, y2_valid, busy2;
  sig_t  u2 [2], y2 [2];
  coef_t g2 [2][2], d2 [2][2];
  irc_controller #(.P(2)) dut2 (
    .clk(clk), .rst_n(rst_n), .start(start2), .u_k(u2), .gamma(g2), .d_gain(d2),
    .y_k(y2), .y_valid(y2_valid), .busy(busy2)
  );

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: y=%0d", what, $time, y_k);
    end
  endtask

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- independent models ----
  longint mx;            // integer model state
  real    rx;            // real model state

  function automatic longint sat32(input longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  function automatic longint rnd20(input longint p);   // floor((p + 2^19) / 2^20)
    longint q;
    q = p + 64'sd524288;
    return (q >= 0) ? q / 64'sd1048576 : -((-q + 64'sd1048575) / 64'sd1048576);
  endfunction

  // one update of the integer model, returns y
  function automatic longint model_step(input longint u, input longint g, input longint d);
    longint t, y;
    t  = sat32(u + sat32(rnd20(d * mx)));
    y  = sat32(mx + sat32(rnd20(g * t)));
    mx = y;
    return y;
  endfunction

  // run one controller update through the DUT, check timing
  task automatic run(input sig_t u);
    @(negedge clk);
    u_k = u;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check("busy", busy);
    check("not yet valid", !y_valid);
    @(posedge clk); #1;
    check("valid after two clocks", y_valid);
    @(negedge clk);
    check("idle again", !busy);
    // spare cycle, as in the 4-cycle schedule
    @(negedge clk);
    check("valid is one pulse", !y_valid);
    n_upd++;
  endtask

  initial begin
    longint ye;
    real ry, g, d, u;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    mx = 0; rx = 0.0;
    g = real'(GAMMA_DEFAULT) / 1048576.0;
    d = real'(D_DEFAULT) / 1048576.0;

    // 1 + 2: random inputs (up to +-50 um), bit-exact and real-valued
    for (int k = 0; k < 3000; k++) begin
      sig_t uu = sig_t'($signed($urandom_range(0, 6553600)) - 3276800);
      if (k > 1500) uu = sig_t'(65536 * 10) + sig_t'($signed($urandom_range(0, 64)) - 32);  // near-constant 10 um
      run(uu);
      ye = model_step(longint'(uu), longint'(GAMMA_DEFAULT), longint'(D_DEFAULT));
      check("bit exact", longint'(y_k) == ye);
      u  = real'(uu) / 65536.0;
      ry = (1.0 + g * d) * rx + g * u;
      rx = ry;
      check("real model", absr(real'(y_k) / 65536.0 - ry) < 1e-3);
    end
    // 3: DC gain F(1) = 1/3 of a 10 um input
    check("DC gain 1/3", absr(real'(y_k) / 65536.0 - 10.0 / 3.0) < 0.01);
    $display("y after constant 10 um input: %f (expect %f)", real'(y_k) / 65536.0, 10.0 / 3.0);

    // unstable gain: must saturate, never wrap
    d_gain = coef_t'(1048576);     // D = +1
    gamma  = coef_t'(1048576);     // Gamma = 1: x doubles each step
    for (int k = 0; k < 60; k++) begin
      run(sig_t'(65536));
      ye = model_step(64'sd65536, 64'sd1048576, 64'sd1048576);
      check("bit exact (saturating)", longint'(y_k) == ye);
      check("no wrap", y_k > 0);
      if (y_k == SIG_MAX) n_sat++;
    end
    check("saturation reached", n_sat > 10);

    // reset clears the state
    @(negedge clk) rst_n = 1'b0;
    @(negedge clk) rst_n = 1'b1;
    gamma = GAMMA_DEFAULT; d_gain = D_DEFAULT; mx = 0;
    run(sig_t'(0));
    check("state cleared by reset", y_k == 0);

    // ---- P = 2: multivariable form ----
    begin
      // Gamma = [0.010 0.002; 0.002 0.020], D = [-3 0.5; 0.5 -2]
      real gr [2][2], dr [2][2], xr [2], yr [2], tr [2], ur [2];
      longint m2 [2], t2 [2], ye2 [2], acc;
      g2[0][0] = coef_t'(10486); g2[0][1] = coef_t'(2097);
      g2[1][0] = coef_t'(2097);  g2[1][1] = coef_t'(20972);
      d2[0][0] = coef_t'(-3145728); d2[0][1] = coef_t'(524288);
      d2[1][0] = coef_t'(524288);   d2[1][1] = coef_t'(-2097152);
      for (int i = 0; i < 2; i++) begin
        m2[i] = 0; xr[i] = 0.0;
        for (int j = 0; j < 2; j++) begin
          gr[i][j] = real'(g2[i][j]) / 1048576.0;
          dr[i][j] = real'(d2[i][j]) / 1048576.0;
        end
      end
      for (int k = 0; k < 2400; k++) begin
        @(negedge clk);
        for (int i = 0; i < 2; i++)
          u2[i] = (k < 1600) ? sig_t'($signed($urandom_range(0, 6553600)) - 3276800) : '0;
        start2 = 1'b1;
        @(negedge clk) start2 = 1'b0;
        check("P=2 busy", busy2);
        @(posedge clk); #1;
        check("P=2 valid after two clocks", y2_valid);
        // integer model: each row summed at full precision, rounded once
        for (int i = 0; i < 2; i++) begin
          acc = 0;
          for (int j = 0; j < 2; j++) acc += longint'(d2[i][j]) * m2[j];
          t2[i] = sat32(longint'(u2[i]) + sat32(rnd20(acc)));
        end
        for (int i = 0; i < 2; i++) begin
          acc = 0;
          for (int j = 0; j < 2; j++) acc += longint'(g2[i][j]) * t2[j];
          ye2[i] = sat32(m2[i] + sat32(rnd20(acc)));
        end
        for (int i = 0; i < 2; i++) m2[i] = ye2[i];
        // real model
        for (int i = 0; i < 2; i++) ur[i] = real'(u2[i]) / 65536.0;
        for (int i = 0; i < 2; i++) tr[i] = ur[i] + dr[i][0] * xr[0] + dr[i][1] * xr[1];
        for (int i = 0; i < 2; i++) yr[i] = xr[i] + gr[i][0] * tr[0] + gr[i][1] * tr[1];
        for (int i = 0; i < 2; i++) xr[i] = yr[i];
        for (int i = 0; i < 2; i++) begin
          check("P=2 bit exact", longint'(y2[i]) == ye2[i]);
          check("P=2 real model", absr(real'(y2[i]) / 65536.0 - yr[i]) < 1e-3);
        end
        @(negedge clk);
      end
      check("P=2 decays with no input", absr(real'(y2[0])) < 64.0 && absr(real'(y2[1])) < 64.0);
    end

    $display("updates=%0d saturated=%0d", n_upd, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
