// fmux_module: one high-bandwidth frequency-domain-multiplexed (fMUX) readout module.
//
// The module reads out NCH = 10 transition-edge sensors, each biased by its own carrier tone
// between 1 and 5 MHz and summed at one SQUID. All channel processing is time multiplexed on
// the 200 MHz clock, one channel per clock, so every channel runs at the 20 Msps converter rate.
//
//   ADC -> demod_mixer (x LO) -> dan_ctrl --readout--> cic_decim /64 -> fir_decim2 /2 -> packetizer
//                                  | car, nul                                              ^ ts
//                                  v                                              irig_timestamp
//   lo_dds (LO) -> synth_mixer -> comb_acc -> carrier DAC, nuller DAC
//
// lo_dds gives each channel's cos/sin; the demodulator brings the SQUID residual of each
// channel to baseband; the DAN integrator turns it into the nuller amplitude that cancels
// the sensor current at the SQUID; the synthesiser and accumulator build the carrier and
// nuller combs for the DACs. The readout (nuller when DAN is on, residual when off) is
// decimated 64 x 2 to 156.25 ksps per channel and packed with a timestamp into packets of
// 11 64-bit words.
//
// Ports: adc_data is sampled on the clock where adc_strobe is high (every NCH clocks);
// dac_car/dac_nul change on dac_valid (every NCH clocks). Two register-write buses at the
// control clock (125 MHz): lo_ctl_* writes frequency tuning words and demodulator phase
// offsets (address = {field, channel}, see lo_dds);
// dan_ctl_* writes carrier amplitude, G_DAN, DAN enable and the timestamp delay (see
// fmux_pkg::dan_reg_e). irig is the IRIG-B time code. Packets leave on pkt_* (valid/ready).
// Latency (clocks, 200 MHz): slot -> LO 1, -> demod 2, -> DAN readout 3; slot -> synth 2,
// comb sample 1 clock after slot NCH-1. A nuller update reaches the DAC 2 to 11 clocks after
// the residual (depending on the slot) plus the converters and cabling outside.
// The structure follows the paper's firmware diagram; the slot sequencer, the ADC hold
// register and the control register map are this design's choices.
module fmux_module #(
  parameter int NCH        = fmux_pkg::NCH,
  parameter int CLK_PER_MS = 200000
) (
  input  logic        clk,            // 200 MHz processing clock
  input  logic        rst,
  input  logic        ctl_clk,        // 125 MHz control clock
  input  logic        ctl_rst,
  // converters
  input  logic signed [15:0] adc_data,
  output logic        adc_strobe,
  output logic signed [15:0] dac_car,
  output logic signed [15:0] dac_nul,
  output logic        dac_valid,
  output logic        dac_clip,
  // lo_ctl
  input  logic        lo_ctl_valid,
  output logic        lo_ctl_ready,
  input  logic [7:0]  lo_ctl_addr,
  input  logic [31:0] lo_ctl_data,
  // dan_ctl
  input  logic        dan_ctl_valid,
  output logic        dan_ctl_ready,
  input  logic [7:0]  dan_ctl_addr,
  input  logic [31:0] dan_ctl_data,
  // time code
  input  logic        irig,
  output logic        ts_locked,
  // science data
  output logic [63:0] pkt_tdata,
  output logic        pkt_tvalid,
  output logic        pkt_tlast,
  input  logic        pkt_tready,
  output logic [15:0] pkt_drop_cnt,
  output logic [NCH-1:0] dan_en
);
  import fmux_pkg::*;

  // ---------------- control interfaces ----------------
  ctl_if #(.ADDR_W(CTL_AW), .DATA_W(CTL_DW)) lo_bus  ();
  ctl_if #(.ADDR_W(CTL_AW), .DATA_W(CTL_DW)) dan_bus ();

  assign lo_bus.valid   = lo_ctl_valid;
  assign lo_bus.addr    = lo_ctl_addr;
  assign lo_bus.data    = lo_ctl_data;
  assign lo_ctl_ready   = lo_bus.ready;
  assign dan_bus.valid  = dan_ctl_valid;
  assign dan_bus.addr   = dan_ctl_addr;
  assign dan_bus.data   = dan_ctl_data;
  assign dan_ctl_ready  = dan_bus.ready;

  logic              lo_we, dan_we;
  logic [CTL_AW-1:0] lo_addr, dan_addr;
  logic [CTL_DW-1:0] lo_data, dan_data;

  ctl_cdc #(.ADDR_W(CTL_AW), .DATA_W(CTL_DW)) u_lo_cdc (
    .wclk(ctl_clk), .wrst(ctl_rst), .w(lo_bus),
    .rclk(clk), .rrst(rst), .r_we(lo_we), .r_addr(lo_addr), .r_data(lo_data));
  ctl_cdc #(.ADDR_W(CTL_AW), .DATA_W(CTL_DW)) u_dan_cdc (
    .wclk(ctl_clk), .wrst(ctl_rst), .w(dan_bus),
    .rclk(clk), .rrst(rst), .r_we(dan_we), .r_addr(dan_addr), .r_data(dan_data));

  logic [3:0] ts_dly;
  always_ff @(posedge clk) begin
    if (rst) ts_dly <= '0;
    else if (dan_we && dan_reg_e'(dan_addr[5:4]) == DAN_REG_TSDLY) ts_dly <= dan_data[3:0];
  end

  // ---------------- slot sequencer and ADC hold ----------------
  ch_t               slot_ch;
  logic signed [15:0] adc_hold;

  assign adc_strobe = (slot_ch == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      slot_ch  <= '0;
      adc_hold <= '0;
    end else begin
      slot_ch <= (int'(slot_ch) == NCH - 1) ? '0 : slot_ch + 1'b1;
      if (adc_strobe) adc_hold <= adc_data;
    end
  end

  // ---------------- local oscillator ----------------
  logic               lo_valid;
  ch_t                lo_ch;
  logic signed [15:0] lo_cos, lo_sin, dm_cos, dm_sin;

  lo_dds #(.NCH(NCH)) u_lo (
    .clk, .rst, .slot_valid(1'b1), .slot_ch,
    .cfg_we(lo_we), .cfg_addr(lo_addr[5:0]), .cfg_data(lo_data),
    .lo_valid, .lo_ch, .lo_cos, .lo_sin, .dm_cos, .dm_sin);

  // ---------------- demodulation and DAN ----------------
  logic                   dm_valid;
  ch_t                    dm_ch;
  logic signed [IQ_W-1:0] dm_i, dm_q;

  demod_mixer u_demod (
    .clk, .rst, .in_valid(lo_valid), .in_ch(lo_ch), .adc(adc_hold),
    .lo_cos(dm_cos), .lo_sin(dm_sin), .out_valid(dm_valid), .out_ch(dm_ch), .out_i(dm_i), .out_q(dm_q));

  logic                   ro_valid, ro_dan;
  ch_t                    ro_ch;
  logic signed [IQ_W-1:0] ro_i, ro_q;
  logic signed [15:0]     car_amp, nul_i, nul_q;

  dan_ctrl #(.NCH(NCH)) u_dan (
    .clk, .rst, .in_valid(dm_valid), .in_ch(dm_ch), .in_i(dm_i), .in_q(dm_q),
    .ro_valid, .ro_ch, .ro_i, .ro_q, .ro_dan,
    .rd_ch(lo_ch), .car_amp, .nul_i, .nul_q,
    .cfg_we(dan_we), .cfg_addr(dan_addr), .cfg_data(dan_data), .dan_en);

  // ---------------- synthesis ----------------
  logic               sy_valid;
  ch_t                sy_ch;
  logic signed [16:0] car_wave, nul_wave;
  logic               car_clip, nul_clip;

  synth_mixer u_synth (
    .clk, .rst, .in_valid(lo_valid), .in_ch(lo_ch), .lo_cos, .lo_sin,
    .car_amp, .nul_i, .nul_q,
    .out_valid(sy_valid), .out_ch(sy_ch), .car_wave, .nul_wave);

  comb_acc #(.NCH(NCH)) u_acc (
    .clk, .rst, .in_valid(sy_valid), .in_ch(sy_ch), .car_wave, .nul_wave,
    .dac_valid, .dac_car, .dac_nul, .car_clip, .nul_clip);

  assign dac_clip = car_clip | nul_clip;

  // ---------------- decimation ----------------
  logic                    cic_valid, fir_valid;
  ch_t                     cic_ch, fir_ch;
  logic signed [OUT_W-1:0] cic_i, cic_q, fir_i, fir_q;

  cic_decim #(.NCH(NCH)) u_cic (
    .clk, .rst, .in_valid(ro_valid), .in_ch(ro_ch), .in_i(ro_i), .in_q(ro_q),
    .out_valid(cic_valid), .out_ch(cic_ch), .out_i(cic_i), .out_q(cic_q));

  fir_decim2 #(.NCH(NCH)) u_fir (
    .clk, .rst, .in_valid(cic_valid), .in_ch(cic_ch), .in_i(cic_i), .in_q(cic_q),
    .out_valid(fir_valid), .out_ch(fir_ch), .out_i(fir_i), .out_q(fir_q));

  // ---------------- timestamps and packets ----------------
  logic [63:0] ts;

  irig_timestamp #(.CLK_PER_MS(CLK_PER_MS)) u_ts (
    .clk, .rst, .irig, .frame_stb(fir_valid && fir_ch == '0), .dly(ts_dly),
    .ts, .locked(ts_locked));

  packetizer #(.NCH(NCH)) u_pkt (
    .clk, .rst, .in_valid(fir_valid), .in_ch(fir_ch), .in_i(fir_i), .in_q(fir_q), .ts,
    .m_tdata(pkt_tdata), .m_tvalid(pkt_tvalid), .m_tlast(pkt_tlast), .m_tready(pkt_tready),
    .drop_cnt(pkt_drop_cnt));

endmodule
