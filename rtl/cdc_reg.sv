// cdc_reg: carries a data word from one clock domain to another with a
// toggle request / toggle acknowledge handshake.
//
// Source side: when no transfer is in flight, a src_valid word goes straight
// into a holding register and the request bit is toggled. A word that
// arrives while a transfer is in flight waits in a one-word buffer (the
// newest word wins) and is launched as soon as the acknowledge is back. The holding register is
// not touched again until the acknowledge toggle has come back through two
// synchronizer flops, so the destination always reads a settled word.
// Destination side: the request toggle passes two synchronizer flops; when it
// differs from the local acknowledge bit, the holding register is copied to
// dst_data, dst_valid pulses for one cycle and the acknowledge bit follows.
//
// Timing: a word offered while idle is launched on the source clock edge
// that samples src_valid and reaches dst_data 3 to 4 destination clocks
// later; a new launch is possible 2 to 3 source clocks after the acknowledge
// arrives. Words written faster than that are dropped, except
// the newest, which suits a sampled signal such as a position or a
// controller output.
module cdc_reg #(
  parameter int W = 16
) (
  input  logic         src_clk,
  input  logic         src_rst_n,
  input  logic [W-1:0] src_data,
  input  logic         src_valid,
  input  logic         dst_clk,
  input  logic         dst_rst_n,
  output logic [W-1:0] dst_data,
  output logic         dst_valid
);

  // source domain
  logic [W-1:0] buf_q, hold_q;
  logic         pend_q, req_q;
  logic [1:0]   ack_sync;
  logic         launch;

  // destination domain
  logic [1:0]   req_sync;
  logic         ack_q;

  // launch when idle and a word is waiting, or arriving this cycle
  assign launch = (pend_q || src_valid) && (req_q == ack_sync[1]);

  always_ff @(posedge src_clk) begin
    if (!src_rst_n) begin
      buf_q    <= '0;
      hold_q   <= '0;
      pend_q   <= 1'b0;
      req_q    <= 1'b0;
      ack_sync <= '0;
    end else begin
      ack_sync <= {ack_sync[0], ack_q};
      if (launch) begin
        hold_q <= src_valid ? src_data : buf_q;
        req_q  <= ~req_q;
      end
      if (src_valid) buf_q <= src_data;
      // a word waits in buf_q only if it could not be launched at once
      if (src_valid && !launch) pend_q <= 1'b1;
      else if (launch)          pend_q <= 1'b0;
    end
  end

  always_ff @(posedge dst_clk) begin
    if (!dst_rst_n) begin
      req_sync  <= '0;
      ack_q     <= 1'b0;
      dst_data  <= '0;
      dst_valid <= 1'b0;
    end else begin
      req_sync  <= {req_sync[0], req_q};
      dst_valid <= 1'b0;
      if (req_sync[1] != ack_q) begin
        dst_data  <= hold_q;
        ack_q     <= req_sync[1];
        dst_valid <= 1'b1;
      end
    end
  end

  // The holding register must stay still while a transfer is in flight.
  property p_hold_stable;
    @(posedge src_clk) disable iff (!src_rst_n)
      (req_q != ack_sync[1]) |=> $stable(hold_q);
  endproperty
  a_hold_stable: assert property (p_hold_stable);

endmodule
