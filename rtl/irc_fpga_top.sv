// irc_fpga_top: FPGA datapath of a discrete-time integral resonant control
// (IRC) loop that damps the first resonance of a high-speed nanopositioner.
//
// Signal flow (one axis):
//   quad_a/quad_b --> quad_decoder (250 MHz) --> memory_unit --> 5 MHz loop:
//   position_scaler (count * 6 nm -> um) --> reference_sum (r + y_k, at the
//   1.25 MHz strobe of sample_timer) --> irc_controller --> memory_unit -->
//   dac_out (250 MHz) --> dac_code.
// host_regs holds the reference, the gains Gamma and D and the encoder reset
// written by the host. The controller output drives the plant directly: the
// loop is the positive-feedback interconnection u = F(z)(r + y).
//
// Clocks: clk_fast is the 250 MHz adapter clock, clk_slow the 5 MHz loop
// clock derived from the same oscillator outside this block. The two are
// treated as unrelated by the memory unit. rst_n is an asynchronous,
// active-low reset, released in step with each clock by reset_sync.
//
// Timing: the controller samples once every four clk_slow cycles (1.25 MHz).
// From a sample strobe, u_k is formed in one clock, y~_k two clocks later
// (ctrl_valid); the next clk_slow edge launches it to the fast loop and the
// DAC code changes 4 to 5 clk_fast cycles after that edge.
// A move of the encoder reaches the position the controller samples after
// roughly 4 to 8 clk_slow cycles (the count crossing plus the wait for the
// next strobe).
//
// Monitor outputs (step_count, position_um, ctrl_out) are what the host
// reads back. Host writes are synchronous to clk_slow. The decoder's
// step_up/step_down flags, the scaler's pos_valid and the controller's busy
// are status signals of the sub-blocks that this datapath does not need;
// they are left unconnected on purpose.
module irc_fpga_top
  import irc_pkg::*;
#(
  parameter coef_t GAMMA_INIT = irc_pkg::GAMMA_DEFAULT,   // 0.010
  parameter coef_t D_INIT     = irc_pkg::D_DEFAULT,       // -3
  parameter int    STEP       = irc_pkg::STEP_PM,         // 6 nm per count
  parameter int    SAMPLE_DIV = 4,                        // 5 MHz / 1.25 MHz
  parameter int    DAC_W      = 16,
  parameter int    FS_LOG2    = 0
) (
  input  logic             clk_fast,
  input  logic             clk_slow,
  input  logic             rst_n,
  // encoder (AquadB), sampled by clk_fast
  input  logic             quad_a,
  input  logic             quad_b,
  // host register writes, clk_slow domain
  input  logic             host_wr_en,
  input  logic [1:0]       host_wr_addr,
  input  logic [31:0]      host_wr_data,
  // DAC, clk_fast domain
  output logic [DAC_W-1:0] dac_code,
  output logic             dac_update,
  output logic             dac_clipped,
  // monitors
  output count_t           step_count,     // clk_fast
  output sig_t             position_um,    // clk_slow
  output sig_t             ctrl_out,       // clk_slow
  output logic             ctrl_valid      // clk_slow
);

  logic rst_fast_n, rst_slow_n;

  reset_sync u_rst_fast (.clk(clk_fast), .rst_in_n(rst_n), .rst_out_n(rst_fast_n));
  reset_sync u_rst_slow (.clk(clk_slow), .rst_in_n(rst_n), .rst_out_n(rst_slow_n));

  // ---------------- host registers (slow) ----------------
  sig_t  ref_um;
  coef_t gamma, d_gain;
  logic  enc_reset_slow, enc_reset_fast;

  host_regs #(.GAMMA_INIT(GAMMA_INIT), .D_INIT(D_INIT)) u_host (
    .clk      (clk_slow),
    .rst_n    (rst_slow_n),
    .wr_en    (host_wr_en),
    .wr_addr  (host_wr_addr),
    .wr_data  (host_wr_data),
    .ref_um   (ref_um),
    .gamma    (gamma),
    .d_gain   (d_gain),
    .enc_reset(enc_reset_slow)
  );

  bit_sync #(.INIT(1'b1)) u_enc_reset_sync (
    .clk  (clk_fast),
    .rst_n(rst_fast_n),
    .d    (enc_reset_slow),
    .q    (enc_reset_fast)
  );

  // ---------------- fast loop: decoder ----------------
  logic step_up, step_down;

  quad_decoder u_dec (
    .clk       (clk_fast),
    .rst_n     (rst_fast_n),
    .quad_a    (quad_a),
    .quad_b    (quad_b),
    .cnt_reset (enc_reset_fast),
    .step_count(step_count),
    .step_up   (step_up),
    .step_down (step_down)
  );

  // ---------------- memory unit ----------------
  count_t count_slow;
  logic   count_slow_valid;
  sig_t   ctrl_fast;
  logic   ctrl_fast_valid;

  memory_unit u_mem (
    .clk_fast        (clk_fast),
    .rst_fast_n      (rst_fast_n),
    .clk_slow        (clk_slow),
    .rst_slow_n      (rst_slow_n),
    .count_fast      (step_count),
    .count_slow      (count_slow),
    .count_slow_valid(count_slow_valid),
    .ctrl_slow       (ctrl_out),
    .ctrl_slow_valid (ctrl_valid),
    .ctrl_fast       (ctrl_fast),
    .ctrl_fast_valid (ctrl_fast_valid)
  );

  // ---------------- slow loop: scaling, junction, controller ----------------
  logic pos_valid, sample, u_valid, irc_busy;
  sig_t u_k;

  position_scaler #(.STEP(STEP)) u_scale (
    .clk        (clk_slow),
    .rst_n      (rst_slow_n),
    .count      (count_slow),
    .count_valid(count_slow_valid),
    .pos_um     (position_um),
    .pos_valid  (pos_valid)
  );

  sample_timer #(.DIV(SAMPLE_DIV)) u_timer (
    .clk   (clk_slow),
    .rst_n (rst_slow_n),
    .sample(sample)
  );

  reference_sum u_sum (
    .clk     (clk_slow),
    .rst_n   (rst_slow_n),
    .sample  (sample),
    .ref_um  (ref_um),
    .position(position_um),
    .u_k     (u_k),
    .u_valid (u_valid)
  );

  // one axis: the controller's P = 1 instance
  sig_t  u_vec [1], y_vec [1];
  coef_t g_mat [1][1], d_mat [1][1];

  assign u_vec[0]    = u_k;
  assign g_mat[0][0] = gamma;
  assign d_mat[0][0] = d_gain;
  assign ctrl_out    = y_vec[0];

  irc_controller #(.P(1)) u_irc (
    .clk    (clk_slow),
    .rst_n  (rst_slow_n),
    .start  (u_valid),
    .u_k    (u_vec),
    .gamma  (g_mat),
    .d_gain (d_mat),
    .y_k    (y_vec),
    .y_valid(ctrl_valid),
    .busy   (irc_busy)
  );

  // ---------------- fast loop: DAC ----------------
  dac_out #(.DAC_W(DAC_W), .FS_LOG2(FS_LOG2)) u_dac (
    .clk       (clk_fast),
    .rst_n     (rst_fast_n),
    .ctrl      (ctrl_fast),
    .ctrl_valid(ctrl_fast_valid),
    .dac_code  (dac_code),
    .dac_update(dac_update),
    .clipped   (dac_clipped)
  );

endmodule
