// demod_mixer: quadrature demodulator of the readout module.
//
// The real 20 Msps ADC sample (held for the NCH slots of one sample period) is multiplied in
// each slot by that channel's LO, giving baseband I = x*cos and Q = -x*sin. A tone
// A*cos(phi + theta) at the channel frequency therefore demodulates to
// (A/2)(cos theta, sin theta) in units of the LO amplitude. The 32-bit products are shifted
// right by DEMOD_SHIFT = 7 to a 24-bit IQ word, which cannot overflow.
// Timing: one register; the output follows the input slot by one clock, with its channel.
// The mixing follows the paper; sign convention and scaling are this design's own.
module demod_mixer #(
  parameter int ADC_W = fmux_pkg::ADC_W,
  parameter int LO_W  = fmux_pkg::LO_W,
  parameter int IQ_W  = fmux_pkg::IQ_W,
  parameter int SHIFT = fmux_pkg::DEMOD_SHIFT
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  fmux_pkg::ch_t           in_ch,
  input  logic signed [ADC_W-1:0] adc,
  input  logic signed [LO_W-1:0]  lo_cos,
  input  logic signed [LO_W-1:0]  lo_sin,
  output logic                    out_valid,
  output fmux_pkg::ch_t           out_ch,
  output logic signed [IQ_W-1:0]  out_i,
  output logic signed [IQ_W-1:0]  out_q
);
  localparam int P_W = ADC_W + LO_W;
  logic signed [P_W-1:0] p_i, p_q;

  assign p_i = adc * lo_cos;
  assign p_q = adc * lo_sin;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= in_valid;
      out_ch    <= in_ch;
      out_i     <= IQ_W'(p_i >>> SHIFT);
      out_q     <= IQ_W'(-(p_q >>> SHIFT));
    end
  end
endmodule
