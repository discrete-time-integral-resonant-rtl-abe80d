// position_scaler: turns the encoder step count into a position in
// micrometres, in the slow (5 MHz) loop.
//
// Each count stands for one sensor step; the step size was set to 6 nm,
// just above the measured sensor noise. The position is
//     pos_um = count * STEP_PM / 10^6        (Q16.16 micrometres)
// computed as count * SCALE / 2^8 with SCALE = round(STEP_PM * 2^24 / 10^6)
// (100663 for 6 nm, a relative error of 3e-6), rounded to nearest.
// A 16-bit count covers +-196 um at 6 nm, well inside the Q16.16 range.
//
// Timing: one register stage; pos_valid follows count_valid by one clock.
module position_scaler
  import irc_pkg::*;
#(
  parameter int STEP = irc_pkg::STEP_PM   // sensor step size in picometres
) (
  input  logic   clk,
  input  logic   rst_n,
  input  count_t count,
  input  logic   count_valid,
  output sig_t   pos_um,
  output logic   pos_valid
);

  localparam int SCALE_FRAC = 24;
  localparam longint SCALE  = (longint'(STEP) * (longint'(1) <<< SCALE_FRAC) + 64'sd500000) / 64'sd1000000;
  localparam int SHIFT      = SCALE_FRAC - SIG_FRAC;

  logic signed [63:0] prod;

  always_comb prod = longint'(count) * SCALE + (longint'(1) <<< (SHIFT-1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos_um    <= '0;
      pos_valid <= 1'b0;
    end else begin
      pos_valid <= count_valid;
      if (count_valid) pos_um <= sig_t'(prod >>> SHIFT);
    end
  end

endmodule
