// lo_dds: time-multiplexed direct digital synthesiser, the local oscillator (LO) of the
// readout module.
//
// Each of the NCH channels has a programmable frequency tuning word (FTW) and a phase
// accumulator. In every TDM slot the accumulator of that slot's channel advances by its FTW,
// so each channel advances once per 20 Msps sample and runs at f = FTW * 20 MHz / 2^32.
// The top LUT_AW+2 phase bits address a quarter-wave sine table (computed at elaboration,
// sample k holds sin((k+0.5)*pi/2/2^LUT_AW)); quadrant folding gives sine, and cosine is the
// sine a quarter turn ahead. The carrier and nuller LO (lo_cos/lo_sin) use the channel
// phase itself; the demodulator LO (dm_cos/dm_sin) adds a per-channel phase offset. The offset
// cancels the phase the nulling loop's latency puts on the returned signal (an integral
// controller only converges while that rotation stays well under 90 degrees); setting it to
// -FTW*d compensates d samples of loop delay.
//
// Timing: all LO outputs appear one clock after slot_valid/slot_ch, with lo_ch/lo_valid.
// Register writes (lo_ctl) use cfg_addr = {field, channel}: field 0 writes the FTW, field 1
// the demodulator phase offset (both PHASE_W bits).
// The DDS and the three LO outputs follow the paper; the demodulator phase offset, the
// widths and the table size are this design's own.
module lo_dds #(
  parameter int NCH     = fmux_pkg::NCH,
  parameter int PHASE_W = fmux_pkg::PHASE_W,
  parameter int LUT_AW  = 10,
  parameter int LO_W    = fmux_pkg::LO_W
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               slot_valid,
  input  fmux_pkg::ch_t                slot_ch,
  input  logic               cfg_we,
  input  logic [5:0]         cfg_addr,
  input  logic [PHASE_W-1:0] cfg_data,
  output logic               lo_valid,
  output fmux_pkg::ch_t                lo_ch,
  output logic signed [LO_W-1:0] lo_cos,
  output logic signed [LO_W-1:0] lo_sin,
  output logic signed [LO_W-1:0] dm_cos,
  output logic signed [LO_W-1:0] dm_sin
);
  localparam int PA_W = LUT_AW + 2;   // phase bits used for the table look-up
  localparam int LUT_N = 2 ** LUT_AW;

  typedef logic signed [LO_W-1:0] amp_t;
  typedef amp_t lut_t [LUT_N];

  function automatic lut_t make_lut();
    lut_t t;
    real pi = 3.14159265358979323846;
    for (int k = 0; k < LUT_N; k++)
      t[k] = amp_t'($rtoi((2.0 ** (LO_W - 1) - 1.0) *
                          $sin((real'(k) + 0.5) * pi / 2.0 / real'(LUT_N)) + 0.5));
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  // Sine of a PA_W-bit phase, folding the quarter-wave table.
  function automatic amp_t sin_lookup(input logic [PA_W-1:0] p);
    logic [LUT_AW-1:0] a;
    amp_t v;
    a = p[PA_W-2] ? ~p[LUT_AW-1:0] : p[LUT_AW-1:0];
    v = LUT[a];
    return p[PA_W-1] ? -v : v;
  endfunction

  logic [PHASE_W-1:0] phase [NCH];
  logic [PHASE_W-1:0] ftw   [NCH];
  logic [PHASE_W-1:0] poff  [NCH];
  logic [PHASE_W-1:0] ph, phd;
  logic [PA_W-1:0]    pa, pad;
  fmux_pkg::ch_t      cfg_ch;

  assign cfg_ch = cfg_addr[3:0];
  assign ph  = phase[slot_ch];
  assign phd = ph + poff[slot_ch];
  assign pa  = ph[PHASE_W-1 -: PA_W];
  assign pad = phd[PHASE_W-1 -: PA_W];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < NCH; c++) begin
        phase[c] <= '0;
        ftw[c]   <= '0;
        poff[c]  <= '0;
      end
      lo_valid <= 1'b0;
      lo_ch    <= '0;
      lo_cos   <= '0;
      lo_sin   <= '0;
      dm_cos   <= '0;
      dm_sin   <= '0;
    end else begin
      if (cfg_we && int'(cfg_ch) < NCH) begin
        if (cfg_addr[5:4] == 2'd0) ftw[cfg_ch]  <= cfg_data;
        if (cfg_addr[5:4] == 2'd1) poff[cfg_ch] <= cfg_data;
      end
      lo_valid <= slot_valid;
      lo_ch    <= slot_ch;
      if (slot_valid) begin
        phase[slot_ch] <= ph + ftw[slot_ch];
        lo_sin <= sin_lookup(pa);
        lo_cos <= sin_lookup(pa + PA_W'(LUT_N));   // + quarter turn
        dm_sin <= sin_lookup(pad);
        dm_cos <= sin_lookup(pad + PA_W'(LUT_N));
      end
    end
  end

  a_ch: assert property (@(posedge clk) disable iff (rst) slot_valid |-> int'(slot_ch) < NCH);
endmodule
