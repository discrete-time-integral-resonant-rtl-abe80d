// irc_controller: discrete-time integral resonant controller, P channels.
//
// The controller is the one-step-advanced form of an integrator C(z) =
// Gamma/(z-1) closed around a feed-through D:
//     y~_k     = (I + Gamma D) x~_k + Gamma u~_k
//     x~_{k+1} = y~_k
// i.e. F(z) = z [zI - (I + Gamma D)]^-1 Gamma, with Gamma and D P-by-P
// matrices. Closed in positive feedback with a negative-imaginary plant
// G(z), the loop is asymptotically stable when -2 Gamma^-1 < D < -G(1)
// (matrix inequalities; Gamma > 0, D < 0). The published single-axis design
// point is P = 1, D = -3, Gamma = 0.010, which puts the controller pole at
// 0.97.
//
// The update is computed as y~ = x~ + Gamma (u~ + D x~), which is
// algebraically the equation above but needs only the two gains as given,
// not their product. The two matrix-vector products take one clock each:
//   cycle 0 (start): t_i  = sat(u~_i + round(sum_j D_ij x~_j))
//   cycle 1        : y~_i = sat(x~_i + round(sum_j Gamma_ij t_j)); x~ <= y~
// Each row sum is formed at full precision and rounded once, to nearest
// (ties up); every result saturates. Gains are Q3.20 and signals Q16.16
// (irc_pkg). The gains are read when `start` is seen (D used at once, Gamma
// latched), so a host write during an update takes effect at the next
// sample. The state x~ is cleared by reset. P = 1 is the published
// experiment (one axis); P > 1 is the multivariable form of the same
// equations.
//
// Timing: y_valid pulses two clocks after `start`; busy is high in between.
// `start` must not come while busy (asserted); with one start every four
// 5 MHz cycles (1.25 MHz) there is a cycle to spare.
module irc_controller
  import irc_pkg::*;
#(
  parameter int P = 1                 // number of inputs/outputs
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  sig_t  u_k    [P],
  input  coef_t gamma  [P][P],
  input  coef_t d_gain [P][P],
  output sig_t  y_k    [P],
  output logic  y_valid,
  output logic  busy
);

  localparam int PW  = SIG_W + COEF_W;            // one product
  localparam int AW  = PW + $clog2(P + 1);        // a row sum
  typedef logic signed [AW-1:0] acc_t;

  typedef enum logic {S_IDLE, S_GAMMA} state_t;

  state_t state;
  sig_t   x_q     [P];   // controller state x~_k (= previous output)
  sig_t   t_q     [P];   // u~_k + D x~_k
  coef_t  gamma_q [P][P];
  sig_t   t_next  [P];
  sig_t   y_next  [P];

  // round(sum_j c_j * s_j / 2^COEF_FRAC), saturated to sig_t
  function automatic sig_t row_mac(input coef_t c [P], input sig_t s [P]);
    acc_t acc, cw, sw;
    acc = acc_t'(1) <<< (COEF_FRAC - 1);
    for (int j = 0; j < P; j++) begin
      cw  = acc_t'(c[j]);                  // sign-extending casts
      sw  = acc_t'(s[j]);
      acc = acc + cw * sw;
    end
    acc = acc >>> COEF_FRAC;
    if (acc > acc_t'(SIG_MAX))      return SIG_MAX;
    else if (acc < acc_t'(SIG_MIN)) return SIG_MIN;
    else                            return sig_t'(acc);
  endfunction

  always_comb begin
    for (int i = 0; i < P; i++) begin
      t_next[i] = add_sat(u_k[i], row_mac(d_gain[i], x_q));
      y_next[i] = add_sat(x_q[i], row_mac(gamma_q[i], t_q));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      y_valid <= 1'b0;
      for (int i = 0; i < P; i++) begin
        x_q[i] <= '0;
        t_q[i] <= '0;
        y_k[i] <= '0;
        for (int j = 0; j < P; j++) gamma_q[i][j] <= '0;
      end
    end else begin
      y_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          t_q     <= t_next;
          gamma_q <= gamma;
          state   <= S_GAMMA;
        end
        S_GAMMA: begin
          x_q     <= y_next;
          y_k     <= y_next;
          y_valid <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);

endmodule
