// reset_sync: per-clock-domain reset. The reset is asserted at once
// (asynchronously) and released two clocks after the input is released, in
// step with the local clock, so every flop of the domain leaves reset in the
// same cycle.
module reset_sync (
  input  logic clk,
  input  logic rst_in_n,
  output logic rst_out_n
);

  logic [1:0] sync_q;

  always_ff @(posedge clk or negedge rst_in_n) begin
    if (!rst_in_n) sync_q <= '0;
    else           sync_q <= {sync_q[0], 1'b1};
  end

  assign rst_out_n = sync_q[1];

endmodule
