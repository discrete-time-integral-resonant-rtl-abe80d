// sample_timer: the controller's sample clock enable.
//
// The controller runs in the 5 MHz loop, but the transfer latency between the
// loops and the registers used to cross them limit the controller to one
// update every four loop cycles, a sampling rate of 1.25 MHz. This block
// counts loop cycles modulo DIV and pulses `sample` for one cycle when the
// count is zero. The first strobe comes in the first cycle after reset.
module sample_timer #(
  parameter int DIV = 4                 // 5 MHz / 1.25 MHz
) (
  input  logic clk,
  input  logic rst_n,
  output logic sample
);

  localparam int CW = (DIV > 1) ? $clog2(DIV) : 1;
  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (cnt == CW'(DIV-1)) begin
      cnt <= '0;
    end else begin
      cnt <= cnt + CW'(1);
    end
  end

  assign sample = rst_n && (cnt == '0);

endmodule
