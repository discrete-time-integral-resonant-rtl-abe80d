// host_regs: registers the host computer writes to tune and run the loop.
//
// The FPGA is connected to a PC that sets the reference, tunes the two
// controller gains and issues the encoder reset. Writes arrive on a simple
// synchronous port in the slow (5 MHz) loop:
//   addr 0  reference r, Q16.16 micrometres
//   addr 1  Gamma, Q3.20 (bits 23:0)
//   addr 2  D,     Q3.20 (bits 23:0)
//   addr 3  bit 0: encoder count reset (level; the count stays zero while set)
// Reset loads the published gains (Gamma = 0.010, D = -3), r = 0 and the
// encoder reset asserted, so the count starts from zero; the host clears it
// to start counting. The register map and port are this design's choice.
//
// Timing: a write is visible on the outputs one clock later.
module host_regs
  import irc_pkg::*;
#(
  parameter coef_t GAMMA_INIT = irc_pkg::GAMMA_DEFAULT,
  parameter coef_t D_INIT     = irc_pkg::D_DEFAULT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [1:0]  wr_addr,
  input  logic [31:0] wr_data,
  output sig_t        ref_um,
  output coef_t       gamma,
  output coef_t       d_gain,
  output logic        enc_reset
);

  typedef enum logic [1:0] {A_REF = 2'd0, A_GAMMA = 2'd1, A_D = 2'd2, A_CTRL = 2'd3} addr_t;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ref_um <= '0;
      gamma     <= GAMMA_INIT;
      d_gain    <= D_INIT;
      enc_reset <= 1'b1;
    end else if (wr_en) begin
      unique case (addr_t'(wr_addr))
        A_REF:   ref_um <= sig_t'(wr_data);
        A_GAMMA: gamma     <= wr_data[COEF_W-1:0];
        A_D:     d_gain    <= wr_data[COEF_W-1:0];
        A_CTRL:  enc_reset <= wr_data[0];
        default: ;
      endcase
    end
  end

endmodule
