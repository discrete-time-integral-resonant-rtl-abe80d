// irc_pkg: types, widths and fixed-point helpers shared by the discrete-time
// integral resonant control (IRC) datapath.
//
// Two number formats are used, as in the original implementation, which
// kept integers in the fast (250 MHz) loop and fixed point in the slow loop:
//   * count_t : the signed 16-bit encoder step count (the decoder's I16).
//   * sig_t   : a signal in Q16.16, 32 bits signed. Positions are in
//               micrometres and the controller output is in volts.
//   * coef_t  : a gain in Q3.20, 24 bits signed (range -8 .. +8).
// The bit widths and Q formats are this design's choice; the original only
// says that fixed point was used in the slow loop.
//
// Default gains are the published design point, D = -3 and Gamma = 0.010,
// rounded to Q3.20. The sensor step size is 6 nm per count.
//
// add_sat() adds two signals with saturation; it is a pure combinational
// function. The controller's gain products are formed in irc_controller.
package irc_pkg;

  localparam int CNT_W     = 16;
  localparam int SIG_W     = 32;
  localparam int SIG_FRAC  = 16;
  localparam int COEF_W    = 24;
  localparam int COEF_FRAC = 20;

  typedef logic signed [CNT_W-1:0]  count_t;
  typedef logic signed [SIG_W-1:0]  sig_t;
  typedef logic signed [COEF_W-1:0] coef_t;

  // Gamma = 0.010 -> round(0.010 * 2^20) = 10486 ; D = -3 -> -3 * 2^20
  localparam coef_t GAMMA_DEFAULT = coef_t'(10486);
  localparam coef_t D_DEFAULT     = coef_t'(-3145728);

  // Sensor resolution: 6 nm per count, given in picometres.
  localparam int STEP_PM = 6000;

  localparam sig_t SIG_MAX = {1'b0, {(SIG_W-1){1'b1}}};
  localparam sig_t SIG_MIN = {1'b1, {(SIG_W-1){1'b0}}};

  function automatic sig_t add_sat(input sig_t a, input sig_t b);
    logic signed [SIG_W:0] s;
    s = {a[SIG_W-1], a} + {b[SIG_W-1], b};
    if (s[SIG_W] != s[SIG_W-1]) return s[SIG_W] ? SIG_MIN : SIG_MAX;
    else                        return sig_t'(s);
  endfunction

endpackage
