// reference_sum: the summing junction in front of the controller.
//
// The controller is in positive feedback with the plant: its input is the
// reference plus the measured position, u_k = r + y_k (r = 0 for damping
// alone). At each sample strobe this block adds the two with saturation and
// registers the result, so the controller sees a value that is held for the
// whole sample period.
//
// Timing: u_valid pulses one clock after `sample`, with u_k valid from then
// until the next strobe.
module reference_sum
  import irc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic sample,
  input  sig_t ref_um,
  input  sig_t position,
  output sig_t u_k,
  output logic u_valid
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      u_k     <= '0;
      u_valid <= 1'b0;
    end else begin
      u_valid <= sample;
      if (sample) u_k <= add_sat(ref_um, position);
    end
  end

endmodule
