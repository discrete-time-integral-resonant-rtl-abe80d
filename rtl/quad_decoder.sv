// quad_decoder: AquadB quadrature decoder for the interferometer's digital
// encoder output, running in the fast (250 MHz) loop.
//
// The two encoder phases A and B are 90 degrees apart. Each cycle the decoder
// compares A and B with their values one cycle earlier. If either phase has
// changed, the count moves by one step; the direction comes from the current
// B and the previous A: when they differ the count goes down, otherwise it
// goes up. With this rule the count rises while A leads B and falls while B
// leads A, one count per edge of either phase (4 counts per encoder period).
// A Reset input returns the count to zero; the sensor measures only relative
// displacement, so the count must be zeroed once at the start. A step that
// arrives in the same cycle as Reset is counted from zero.
//
// The structure follows the original decoder schematic: two one-cycle
// delays for A and B, a "changed" detector, a +1/-1 selector, an adder, a
// reset selector that feeds zero into the adder, and a feedback register
// holding the signed 16-bit step count. Inputs are taken to be already
// sampled by the fast clock (the adapter's digital inputs); no extra
// synchronizer stages are added. If A and B both change in one cycle (an
// encoder rate the 250 MHz sampling cannot resolve) the step is still
// counted once, by the same rule.
//
// Timing: step_count is registered; it reflects an edge of A or B one clock
// after the cycle in which the new level is presented. The count wraps
// modulo 2^16 like the original I16 counter.
module quad_decoder
  import irc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,       // initialises the feedback registers
  input  logic   quad_a,
  input  logic   quad_b,
  input  logic   cnt_reset,   // "Reset": count returns to zero
  output count_t step_count,
  output logic   step_up,     // one-cycle flags of the last step taken
  output logic   step_down
);

  logic   a_prev, b_prev;
  logic   changed, down;
  count_t base, next_count;

  always_comb begin
    changed    = (quad_a != a_prev) || (quad_b != b_prev);
    down       = (quad_b != a_prev);
    base       = cnt_reset ? count_t'(0) : step_count;
    next_count = changed ? (down ? base - count_t'(1) : base + count_t'(1)) : base;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_prev     <= 1'b0;
      b_prev     <= 1'b0;
      step_count <= '0;
      step_up    <= 1'b0;
      step_down  <= 1'b0;
    end else begin
      a_prev     <= quad_a;
      b_prev     <= quad_b;
      step_count <= next_count;
      step_up    <= changed && !down;
      step_down  <= changed && down;
    end
  end

endmodule
