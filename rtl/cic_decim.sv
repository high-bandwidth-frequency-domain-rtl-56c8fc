// cic_decim: time-multiplexed cascaded integrator-comb (CIC) decimator, /R with N stages.
//
// The readout IQ of all channels arrives interleaved, one channel per clock, each channel at
// 20 Msps. Per channel and per component (I, Q) there are N integrators at the input rate and
// N combs (differential delay 1) at the output rate, kept in register arrays indexed by the
// slot's channel, so one adder chain serves all channels (Hogenauer structure). The
// integrators run at full width IN_W + N*log2(R) and wrap, which the comb section undoes.
// A shared phase counter advances after each slot NCH-1; in the round where it reaches R-1
// the combs run and the channel's output is produced, so each channel emits one sample per R
// input samples (312.5 ksps for R = 64), in the same interleaved order.
// The DC gain R^N = 2^36 is removed by an arithmetic shift of N*log2(R) - FRAC bits, leaving
// FRAC = 8 fractional bits in the OUT_W-bit output.
// Timing: output one clock after the input sample that completes it.
// Six stages and /64 follow the paper; M = 1, the widths and FRAC are this design's own.
module cic_decim #(
  parameter int NCH    = fmux_pkg::NCH,
  parameter int STAGES = fmux_pkg::CIC_STAGES,
  parameter int R      = fmux_pkg::CIC_R,
  parameter int IN_W   = fmux_pkg::IQ_W,
  parameter int OUT_W  = fmux_pkg::OUT_W,
  parameter int FRAC   = 8
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  fmux_pkg::ch_t           in_ch,
  input  logic signed [IN_W-1:0]  in_i,
  input  logic signed [IN_W-1:0]  in_q,
  output logic                    out_valid,
  output fmux_pkg::ch_t           out_ch,
  output logic signed [OUT_W-1:0] out_i,
  output logic signed [OUT_W-1:0] out_q
);
  localparam int GROWTH = STAGES * $clog2(R);
  localparam int W      = IN_W + GROWTH;
  localparam int SHIFT  = GROWTH - FRAC;
  typedef logic signed [W-1:0] w_t;
  typedef w_t stage_t [STAGES];

  w_t integ_i [NCH][STAGES];
  w_t integ_q [NCH][STAGES];
  w_t comb_i  [NCH][STAGES];
  w_t comb_q  [NCH][STAGES];
  logic [$clog2(R)-1:0] phase;

  stage_t ni_i, ni_q;   // integrator values after this input
  stage_t cd_i, cd_q;   // comb stage inputs (new delay values)
  w_t     y_i, y_q;

  always_comb begin
    ni_i[0] = integ_i[in_ch][0] + w_t'(in_i);
    ni_q[0] = integ_q[in_ch][0] + w_t'(in_q);
    for (int s = 1; s < STAGES; s++) begin
      ni_i[s] = integ_i[in_ch][s] + ni_i[s-1];
      ni_q[s] = integ_q[in_ch][s] + ni_q[s-1];
    end
    y_i = ni_i[STAGES-1];
    y_q = ni_q[STAGES-1];
    for (int s = 0; s < STAGES; s++) begin
      cd_i[s] = y_i;
      cd_q[s] = y_q;
      y_i = y_i - comb_i[in_ch][s];
      y_q = y_q - comb_q[in_ch][s];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < NCH; c++)
        for (int s = 0; s < STAGES; s++) begin
          integ_i[c][s] <= '0; integ_q[c][s] <= '0;
          comb_i[c][s]  <= '0; comb_q[c][s]  <= '0;
        end
      phase     <= '0;
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int s = 0; s < STAGES; s++) begin
          integ_i[in_ch][s] <= ni_i[s];
          integ_q[in_ch][s] <= ni_q[s];
        end
        if (phase == $clog2(R)'(R - 1)) begin
          for (int s = 0; s < STAGES; s++) begin
            comb_i[in_ch][s] <= cd_i[s];
            comb_q[in_ch][s] <= cd_q[s];
          end
          out_valid <= 1'b1;
          out_ch    <= in_ch;
          out_i     <= OUT_W'(y_i >>> SHIFT);
          out_q     <= OUT_W'(y_q >>> SHIFT);
        end
        if (int'(in_ch) == NCH - 1) phase <= phase + 1'b1;
      end
    end
  end
endmodule
