// comb_acc: frequency-comb accumulator of the readout module.
//
// The synthesiser delivers one carrier and one nuller sample per channel slot. This block
// adds the NCH slot samples of one sample period (slot 0 starts a new sum, slot NCH-1
// closes it) and, on the clock after slot NCH-1, presents the two sums, saturated to DAC_W
// bits, on dac_car/dac_nul with a one-clock dac_valid: one comb sample per 20 Msps period.
// The DAC outputs hold between strobes; car_clip/nul_clip flag a saturated sample.
// Summing all channels into one comb per DAC follows the paper; saturation is this design's.
module comb_acc #(
  parameter int NCH   = fmux_pkg::NCH,
  parameter int DAC_W = fmux_pkg::DAC_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  fmux_pkg::ch_t           in_ch,
  input  logic signed [DAC_W:0]   car_wave,
  input  logic signed [DAC_W:0]   nul_wave,
  output logic                    dac_valid,
  output logic signed [DAC_W-1:0] dac_car,
  output logic signed [DAC_W-1:0] dac_nul,
  output logic                    car_clip,
  output logic                    nul_clip
);
  localparam int S_W = DAC_W + 1 + $clog2(NCH + 1);
  typedef logic signed [S_W-1:0] sum_t;
  localparam sum_t MAXV = sum_t'(2 ** (DAC_W - 1) - 1);
  localparam sum_t MINV = -sum_t'(2 ** (DAC_W - 1));

  sum_t sc, sn, nc, nn;

  assign nc = (in_ch == '0 ? sum_t'(0) : sc) + sum_t'(car_wave);
  assign nn = (in_ch == '0 ? sum_t'(0) : sn) + sum_t'(nul_wave);

  function automatic logic signed [DAC_W-1:0] sat(input sum_t v);
    if (v > MAXV)      return MAXV[DAC_W-1:0];
    else if (v < MINV) return MINV[DAC_W-1:0];
    else               return v[DAC_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      sc <= '0; sn <= '0;
      dac_valid <= 1'b0;
      dac_car <= '0; dac_nul <= '0;
      car_clip <= 1'b0; nul_clip <= 1'b0;
    end else begin
      dac_valid <= 1'b0;
      if (in_valid) begin
        sc <= nc;
        sn <= nn;
        if (int'(in_ch) == NCH - 1) begin
          dac_valid <= 1'b1;
          dac_car   <= sat(nc);
          dac_nul   <= sat(nn);
          car_clip  <= (nc > MAXV) || (nc < MINV);
          nul_clip  <= (nn > MAXV) || (nn < MINV);
        end
      end
    end
  end
endmodule
