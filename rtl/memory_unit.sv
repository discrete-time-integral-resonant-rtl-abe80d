// memory_unit: the register exchange between the fast (250 MHz) decoder loop
// and the slow (5 MHz) controller loop.
//
// The original implementation runs the quadrature decoder in a 250 MHz
// single-cycle timed loop and the controller in a 5 MHz loop, with registers
// carrying the data between them. This block provides both paths:
//   * the signed step count, from the fast loop to the slow loop, sent
//     continuously so the slow loop always holds a recent count;
//   * the controller output, from the slow loop back to the fast loop, sent
//     each time the controller produces a new value.
// Each path is a cdc_reg toggle handshake, so the design does not rely on
// the phase relation of the two clocks (the 5 MHz clock is derived from the
// 250 MHz oscillator, but that is not required here).
//
// Timing: a count reaches the slow side 3 to 4 slow clocks after it is
// launched; a new count is launched about 3 slow clocks after the previous
// one (it waits for the acknowledge). A controller output is launched on the
// slow clock edge that samples ctrl_slow_valid and reaches the fast side 3
// to 4 fast clocks after that edge. These are the transfer
// latencies the original design notes between the two loops.
module memory_unit
  import irc_pkg::*;
(
  input  logic   clk_fast,
  input  logic   rst_fast_n,
  input  logic   clk_slow,
  input  logic   rst_slow_n,
  // fast -> slow
  input  count_t count_fast,
  output count_t count_slow,
  output logic   count_slow_valid,
  // slow -> fast
  input  sig_t   ctrl_slow,
  input  logic   ctrl_slow_valid,
  output sig_t   ctrl_fast,
  output logic   ctrl_fast_valid
);

  cdc_reg #(.W(CNT_W)) u_count_xfer (
    .src_clk  (clk_fast),
    .src_rst_n(rst_fast_n),
    .src_data (count_fast),
    .src_valid(1'b1),
    .dst_clk  (clk_slow),
    .dst_rst_n(rst_slow_n),
    .dst_data (count_slow),
    .dst_valid(count_slow_valid)
  );

  cdc_reg #(.W(SIG_W)) u_ctrl_xfer (
    .src_clk  (clk_slow),
    .src_rst_n(rst_slow_n),
    .src_data (ctrl_slow),
    .src_valid(ctrl_slow_valid),
    .dst_clk  (clk_fast),
    .dst_rst_n(rst_fast_n),
    .dst_data (ctrl_fast),
    .dst_valid(ctrl_fast_valid)
  );

endmodule
