// dan_ctrl: digital active nulling (DAN) controller of the readout module.
//
// For every channel it holds a carrier amplitude, a DAN gain G_DAN and an enable bit, and a
// complex integrator (ACC_W bits for I and for Q). When a demodulated residual of a channel
// arrives and DAN is on for it, the integrator adds G_DAN * residual, saturating at full
// scale. The integrator's top 16 bits are the nuller amplitude that the synthesiser puts on
// the nuller DAC; the analog summing junction subtracts the nuller current from the carrier
// current, so the loop drives the residual towards zero (integral control). When DAN is off
// the integrator is cleared and the nuller is silent.
//
// The readout output is what the decimator receives: the integrator (top IQ_W bits) when DAN
// is on, since the nuller then carries the science signal, or the residual itself when it
// is off.
//
// Ports: residual stream in_* from the demodulator; readout stream ro_* one clock later; a
// combinational read port (rd_ch -> car_amp, nul_i, nul_q) for the synthesiser; register
// writes cfg_* with address {field, channel} as in fmux_pkg::dan_reg_e.
// The integrator, the per-channel gain and the readout switch follow the paper; widths,
// saturation, clearing on disable and the sign convention are this design's choice.
module dan_ctrl #(
  parameter int NCH   = fmux_pkg::NCH,
  parameter int IQ_W  = fmux_pkg::IQ_W,
  parameter int AMP_W = fmux_pkg::DAC_W,
  parameter int G_W   = 16,
  parameter int ACC_W = fmux_pkg::DAN_ACC_W
) (
  input  logic                    clk,
  input  logic                    rst,
  // residual from the demodulator
  input  logic                    in_valid,
  input  fmux_pkg::ch_t           in_ch,
  input  logic signed [IQ_W-1:0]  in_i,
  input  logic signed [IQ_W-1:0]  in_q,
  // readout to the decimator
  output logic                    ro_valid,
  output fmux_pkg::ch_t           ro_ch,
  output logic signed [IQ_W-1:0]  ro_i,
  output logic signed [IQ_W-1:0]  ro_q,
  output logic                    ro_dan,      // readout taken from the nuller
  // amplitudes for the synthesiser
  input  fmux_pkg::ch_t           rd_ch,
  output logic signed [AMP_W-1:0] car_amp,
  output logic signed [AMP_W-1:0] nul_i,
  output logic signed [AMP_W-1:0] nul_q,
  // dan_ctl register writes
  input  logic                    cfg_we,
  input  logic [7:0]              cfg_addr,
  input  logic [31:0]             cfg_data,
  output logic [NCH-1:0]          dan_en
);
  localparam int PROD_W = IQ_W + G_W + 1;
  localparam int SUM_W  = ACC_W + 2;
  typedef logic signed [ACC_W-1:0] acc_t;

  logic signed [AMP_W-1:0] car  [NCH];
  logic        [G_W-1:0]   gain [NCH];
  acc_t                    acc_i [NCH];
  acc_t                    acc_q [NCH];

  fmux_pkg::dan_reg_e cfg_field;
  fmux_pkg::ch_t      cfg_ch;
  assign cfg_field = fmux_pkg::dan_reg_e'(cfg_addr[5:4]);
  assign cfg_ch    = cfg_addr[3:0];

  localparam logic signed [SUM_W-1:0] SMAX = (SUM_W'(1) <<< (ACC_W - 1)) - 1;

  // a + d, clipped to +-(2^(ACC_W-1) - 1)
  function automatic acc_t sat_add(input acc_t a, input logic signed [PROD_W-1:0] d);
    logic signed [SUM_W-1:0] s;
    s = SUM_W'(a) + SUM_W'(d);
    if (s > SMAX)       return acc_t'(SMAX);
    else if (s < -SMAX) return acc_t'(-SMAX);
    else                return acc_t'(s);
  endfunction

  logic signed [PROD_W-1:0] d_i, d_q;
  acc_t                     n_i, n_q;
  logic signed [G_W:0]      g_s;

  assign g_s = {1'b0, gain[in_ch]};
  assign d_i = in_i * g_s;
  assign d_q = in_q * g_s;
  assign n_i = sat_add(acc_i[in_ch], d_i);
  assign n_q = sat_add(acc_q[in_ch], d_q);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < NCH; c++) begin
        car[c]   <= '0;
        gain[c]  <= '0;
        acc_i[c] <= '0;
        acc_q[c] <= '0;
      end
      dan_en   <= '0;
      ro_valid <= 1'b0;
      ro_ch    <= '0;
      ro_i     <= '0;
      ro_q     <= '0;
      ro_dan   <= 1'b0;
    end else begin
      ro_valid <= in_valid;
      ro_ch    <= in_ch;
      if (in_valid) begin
        if (dan_en[in_ch]) begin
          acc_i[in_ch] <= n_i;
          acc_q[in_ch] <= n_q;
          ro_i   <= n_i[ACC_W-1 -: IQ_W];
          ro_q   <= n_q[ACC_W-1 -: IQ_W];
          ro_dan <= 1'b1;
        end else begin
          acc_i[in_ch] <= '0;
          acc_q[in_ch] <= '0;
          ro_i   <= in_i;
          ro_q   <= in_q;
          ro_dan <= 1'b0;
        end
      end
      if (cfg_we && int'(cfg_ch) < NCH) begin
        case (cfg_field)
          fmux_pkg::DAN_REG_CAR:  car[cfg_ch]    <= cfg_data[AMP_W-1:0];
          fmux_pkg::DAN_REG_GAIN: gain[cfg_ch]   <= cfg_data[G_W-1:0];
          fmux_pkg::DAN_REG_EN:   dan_en[cfg_ch] <= cfg_data[0];
          default: ;
        endcase
      end
    end
  end

  assign car_amp = car[rd_ch];
  assign nul_i   = acc_i[rd_ch][ACC_W-1 -: AMP_W];
  assign nul_q   = acc_q[rd_ch][ACC_W-1 -: AMP_W];
endmodule
