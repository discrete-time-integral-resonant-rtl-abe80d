// bit_sync: two-flop synchronizer for a slowly changing level (here the
// encoder reset written by the host) entering another clock domain. The
// output follows the input two to three destination clocks later.
module bit_sync #(
  parameter logic INIT = 1'b0          // output value during reset
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);

  logic meta_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      meta_q <= INIT;
      q      <= INIT;
    end else begin
      meta_q <= d;
      q      <= meta_q;
    end
  end

endmodule
