// fir_decim2: time-multiplexed compensating FIR filter and decimator by 2.
//
// The CIC output droops across the passband (its response is (sin(pi f R/fs)/(R sin(pi f/fs)))^6
// for R = 64). This filter runs at the CIC output rate (312.5 ksps per channel), lifts the
// passband back to flat and suppresses the band that folds when it keeps every second sample,
// giving the 156.25 ksps science rate. Per channel and component it keeps a NTAPS-sample
// delay line in a register array indexed by the slot's channel; on every second round of
// channel samples it forms sum(h[k] x[n-k]) in one clock and scales it by 2^-17.
//
// The taps are this design's own: a 21-tap least-squares fit to 1/CIC(f) up to 50 kHz with
// a stopband from 100 kHz, quantised to 18 bits and scaled to sum to 2^17 (DC gain 1 within
// 2^-16). The response (CIC times FIR) is within 2 % of flat to 50 kHz and -3 dB near 70 kHz.
// Timing: output one clock after the input sample that completes it.
module fir_decim2 #(
  parameter int NCH    = fmux_pkg::NCH,
  parameter int W      = fmux_pkg::OUT_W,
  parameter int NTAPS  = 21,
  parameter int COEF_W = 18,
  parameter int QB     = 17
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  fmux_pkg::ch_t       in_ch,
  input  logic signed [W-1:0] in_i,
  input  logic signed [W-1:0] in_q,
  output logic                out_valid,
  output fmux_pkg::ch_t       out_ch,
  output logic signed [W-1:0] out_i,
  output logic signed [W-1:0] out_q
);
  typedef logic signed [COEF_W-1:0] coef_t;
  localparam coef_t H [21] = '{
    -18'sd46,   18'sd177,  -18'sd617, -18'sd1558,  18'sd1975,  18'sd6068, -18'sd2755,
    -18'sd16978, -18'sd2409, 18'sd45093, 18'sd73170, 18'sd45093, -18'sd2409, -18'sd16978,
    -18'sd2755,  18'sd6068,  18'sd1975, -18'sd1558, -18'sd617,   18'sd177,  -18'sd46 };

  localparam int ACC_W = W + COEF_W + $clog2(NTAPS);
  typedef logic signed [ACC_W-1:0] acc_t;
  localparam acc_t MAXV = acc_t'(2 ** (W - 1) - 1);
  localparam acc_t MINV = -acc_t'(2 ** (W - 1));

  logic signed [W-1:0] line_i [NCH][NTAPS];
  logic signed [W-1:0] line_q [NCH][NTAPS];
  logic                phase;
  acc_t                s_i, s_q;

  // Sum over the new sample and the NTAPS-1 previous ones of this channel.
  always_comb begin
    s_i = acc_t'(in_i) * acc_t'(H[0]);
    s_q = acc_t'(in_q) * acc_t'(H[0]);
    for (int k = 1; k < NTAPS; k++) begin
      s_i = s_i + acc_t'(line_i[in_ch][k-1]) * acc_t'(H[k]);
      s_q = s_q + acc_t'(line_q[in_ch][k-1]) * acc_t'(H[k]);
    end
    s_i = s_i >>> QB;
    s_q = s_q >>> QB;
  end

  function automatic logic signed [W-1:0] sat(input acc_t v);
    if (v > MAXV)      return MAXV[W-1:0];
    else if (v < MINV) return MINV[W-1:0];
    else               return v[W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < NCH; c++)
        for (int k = 0; k < NTAPS; k++) begin
          line_i[c][k] <= '0;
          line_q[c][k] <= '0;
        end
      phase     <= 1'b0;
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_i     <= '0;
      out_q     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        line_i[in_ch][0] <= in_i;
        line_q[in_ch][0] <= in_q;
        for (int k = 1; k < NTAPS; k++) begin
          line_i[in_ch][k] <= line_i[in_ch][k-1];
          line_q[in_ch][k] <= line_q[in_ch][k-1];
        end
        if (phase) begin
          out_valid <= 1'b1;
          out_ch    <= in_ch;
          out_i     <= sat(s_i);
          out_q     <= sat(s_q);
        end
        if (int'(in_ch) == NCH - 1) phase <= ~phase;
      end
    end
  end

  initial assert (NTAPS == 21) else $error("fir_decim2: the tap table holds 21 taps");
endmodule
