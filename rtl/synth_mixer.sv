// synth_mixer: carrier and nuller synthesiser of the readout module.
//
// In each TDM slot it turns the channel's baseband amplitudes into one sample of its tones:
// carrier = A * cos(phi), and nuller = Re((I + jQ) e^{j phi}) = I*cos(phi) - Q*sin(phi), both
// scaled back by the LO full scale (>>> LO_W-1). The nuller can reach sqrt(2) of full scale,
// so both outputs keep one extra bit for the accumulator to saturate.
// Timing: one register; output follows the input slot by one clock.
// Mixing amplitudes with the LO follows the paper; the complex nuller form is this design's.
module synth_mixer #(
  parameter int LO_W  = fmux_pkg::LO_W,
  parameter int AMP_W = fmux_pkg::DAC_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  input  fmux_pkg::ch_t          in_ch,
  input  logic signed [LO_W-1:0] lo_cos,
  input  logic signed [LO_W-1:0] lo_sin,
  input  logic signed [AMP_W-1:0] car_amp,
  input  logic signed [AMP_W-1:0] nul_i,
  input  logic signed [AMP_W-1:0] nul_q,
  output logic                   out_valid,
  output fmux_pkg::ch_t          out_ch,
  output logic signed [AMP_W:0]  car_wave,
  output logic signed [AMP_W:0]  nul_wave
);
  localparam int P_W = AMP_W + LO_W + 1;
  logic signed [P_W-1:0] pc, pn;

  assign pc = P_W'(car_amp * lo_cos);
  assign pn = P_W'(nul_i * lo_cos) - P_W'(nul_q * lo_sin);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_ch    <= '0;
      car_wave  <= '0;
      nul_wave  <= '0;
    end else begin
      out_valid <= in_valid;
      out_ch    <= in_ch;
      car_wave  <= (AMP_W+1)'(pc >>> (LO_W - 1));
      nul_wave  <= (AMP_W+1)'(pn >>> (LO_W - 1));
    end
  end
endmodule
