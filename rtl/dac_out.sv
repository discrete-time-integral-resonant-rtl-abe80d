// dac_out: output register for the digital-to-analog converter that drives
// the piezo amplifier, in the fast (250 MHz) loop.
//
// The controller output (Q16.16 volts) is converted to a signed DAC_W-bit
// code whose full scale is +-2^FS_LOG2 volts:
//     code = sat( round( ctrl * 2^(DAC_W-1) / 2^FS_LOG2 ) )
// Values beyond full scale clip to the largest or smallest code and set
// `clipped`. The code is held between updates. DAC width and range are this
// design's choice (16 bits, +-1 V); only the existence of the converter is
// given.
//
// Timing: dac_code and dac_update change one clock after ctrl_valid.
module dac_out
  import irc_pkg::*;
#(
  parameter int DAC_W   = 16,
  parameter int FS_LOG2 = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  sig_t             ctrl,
  input  logic             ctrl_valid,
  output logic [DAC_W-1:0] dac_code,
  output logic             dac_update,
  output logic             clipped
);

  localparam int SHIFT = SIG_FRAC - (DAC_W - 1) + FS_LOG2;
  localparam logic signed [SIG_W:0] CODE_MAX = (SIG_W+1)'((64'sd1 <<< (DAC_W-1)) - 1);
  localparam logic signed [SIG_W:0] CODE_MIN = -(SIG_W+1)'(64'sd1 <<< (DAC_W-1));

  if (SHIFT < 1 || DAC_W > SIG_W) begin : g_bad_cfg
    $error("dac_out: DAC_W/FS_LOG2 need SIG_FRAC - (DAC_W-1) + FS_LOG2 >= 1");
  end

  logic signed [SIG_W:0] rounded;
  logic [DAC_W-1:0]      code;
  logic                  clip;

  always_comb begin
    rounded = ($signed({ctrl[SIG_W-1], ctrl}) + (SIG_W+1)'(1 <<< (SHIFT-1))) >>> SHIFT;
    clip    = 1'b1;
    if (rounded > CODE_MAX)      code = CODE_MAX[DAC_W-1:0];
    else if (rounded < CODE_MIN) code = CODE_MIN[DAC_W-1:0];
    else begin
      code = rounded[DAC_W-1:0];
      clip = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dac_code   <= '0;
      dac_update <= 1'b0;
      clipped    <= 1'b0;
    end else begin
      dac_update <= ctrl_valid;
      if (ctrl_valid) begin
        dac_code <= code;
        clipped  <= clip;
      end
    end
  end

endmodule
