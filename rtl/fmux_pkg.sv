// fmux_pkg: widths, channel count, shared types and the control register map of one
// high-bandwidth frequency-multiplexed (fMUX) readout module.
//
// One module reads out NCH = 10 detector channels. All per-channel processing is time
// multiplexed on a 200 MHz clock: the ten channels take turns, one per clock cycle, so each
// channel sees a 20 Msps stream, the ADC/DAC sample rate. Converter width (16 bits), channel
// count, clock and sample rates follow the paper; the internal widths (LO amplitude, IQ
// words, phase accumulator) are this design's own choice.
package fmux_pkg;

  localparam int NCH     = 10;   // channels per readout module
  localparam int CH_W    = 4;    // width of a channel index (up to 16 channels)
  localparam int ADC_W   = 16;   // ADC sample width
  localparam int DAC_W   = 16;   // DAC sample width
  localparam int LO_W    = 16;   // local-oscillator amplitude width (signed)
  localparam int PHASE_W = 32;   // DDS phase accumulator width
  localparam int IQ_W    = 24;   // demodulated / readout IQ component width
  localparam int OUT_W   = 32;   // decimated I or Q width: one IQ point is a 64-bit word
  localparam int CTL_AW  = 8;    // control bus address width
  localparam int CTL_DW  = 32;   // control bus data width

  typedef logic [CH_W-1:0] ch_t;

  // One local-oscillator sample: cosine and sine of a channel's phase.
  typedef struct packed {
    logic signed [LO_W-1:0] c;
    logic signed [LO_W-1:0] s;
  } lo_t;

  // Baseband complex sample.
  typedef struct packed {
    logic signed [IQ_W-1:0] i;
    logic signed [IQ_W-1:0] q;
  } iq_t;

  // dan_ctl register map: address = {field[1:0], channel[3:0]} (bits 7:6 unused).
  typedef enum logic [1:0] {
    DAN_REG_CAR   = 2'd0,   // carrier amplitude of a channel, signed 16 bit
    DAN_REG_GAIN  = 2'd1,   // DAN integral gain G_DAN of a channel, unsigned 16 bit
    DAN_REG_EN    = 2'd2,   // DAN enable of a channel, bit 0
    DAN_REG_TSDLY = 2'd3    // timestamp delay in output frames, bits 3:0 (channel ignored)
  } dan_reg_e;

  // Fixed-point scaling shared by the DAN loop and its models.
  localparam int DEMOD_SHIFT = 7;    // demod product (32 bit) >> 7 -> 24-bit IQ
  localparam int DAN_ACC_W   = 40;   // DAN integrator width
  localparam int CIC_STAGES  = 6;
  localparam int CIC_R       = 64;

endpackage
