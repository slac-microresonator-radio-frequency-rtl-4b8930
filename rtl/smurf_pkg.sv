// smurf_pkg -- shared widths, sample types, register map and the oscillator
// table of the tone-tracking readout.
//
// Every tone is synthesised and demodulated as a complex baseband signal at
// one sample per clock. Frequencies are 32-bit phase increments per sample
// (a word of 2^32 is the complex sample rate), so negative words are tones
// below the band centre. The DAC and ADC widths (16 and 14 bit) follow the
// converters of the full system; all other widths are this design's choice.
package smurf_pkg;

  localparam int FREQ_W  = 32;  // frequency / phase word
  localparam int LUT_AW  = 10;  // oscillator table address bits
  localparam int LUT_W   = 16;  // oscillator sample, Q1.15
  localparam int ADC_W   = 14;  // ADC sample width (per I and Q)
  localparam int DAC_W   = 16;  // DAC sample width (per I and Q)
  localparam int TONE_W  = 18;  // one channel's tone sample, before the comb sum
  localparam int TAMP_W  = 15;  // drive amplitude register, DAC LSB
  localparam int AMP_W   = 24;  // complex amplitude from one down-converter window
  localparam int COEF_W  = 32;  // rotation coefficient
  localparam int ERR_W   = 32;  // frequency error / in-phase value, Q16
  localparam int GAIN_W  = 16;  // signed loop gain
  localparam int ROT_FRAC = 34; // normalised S21 = amp * coef / 2^ROT_FRAC
  localparam int SB_SHIFT = 3;  // sideband amplitude = drive amplitude / 8 (-18 dB)

  typedef logic signed [LUT_W-1:0] lut_t;
  typedef lut_t lut_rom_t [2**LUT_AW];

  typedef struct packed { logic signed [ADC_W-1:0]  re; logic signed [ADC_W-1:0]  im; } adc_smp_t;
  typedef struct packed { logic signed [DAC_W-1:0]  re; logic signed [DAC_W-1:0]  im; } dac_smp_t;
  typedef struct packed { logic signed [TONE_W-1:0] re; logic signed [TONE_W-1:0] im; } tone_smp_t;
  typedef struct packed { lut_t re; lut_t im; } lo_t;  // re = cos, im = sin
  typedef struct packed { logic signed [AMP_W-1:0]  re; logic signed [AMP_W-1:0]  im; } amp_t;
  typedef struct packed { logic signed [COEF_W-1:0] re; logic signed [COEF_W-1:0] im; } coef_t;

  // Per-channel register index (low 4 bits of a register address).
  typedef enum logic [3:0] {
    REG_CENTER   = 4'd0,  // centre / open-loop frequency word
    REG_AMP      = 4'd1,  // drive amplitude
    REG_SB_OFF   = 4'd2,  // sideband detuning word
    REG_GAIN     = 4'd3,  // signed loop gain
    REG_COEF_RE  = 4'd4,  // host rotation coefficient, real
    REG_COEF_IM  = 4'd5,  // host rotation coefficient, imaginary
    REG_CTRL     = 4'd6,  // control bits, see ctrl_t
    REG_FREQ     = 4'd8,  // read: current tone frequency
    REG_ERR      = 4'd9,  // read: last frequency error (Q16)
    REG_INPH     = 4'd10, // read: last in-phase value (Q16)
    REG_ACOEF_RE = 4'd11, // read: coefficient in use, real
    REG_ACOEF_IM = 4'd12, // read: coefficient in use, imaginary
    REG_STATUS   = 4'd13  // read: bit0 sideband calibration done
  } reg_t;

  typedef struct packed {
    logic use_sb_cal;   // bit 3: use the sideband-derived coefficient
    logic closed_loop;  // bit 2: tone tracking on
    logic sb_en;        // bit 1: sidebands on
    logic tone_en;      // bit 0: drive tone on
  } ctrl_t;

  // Host-written configuration of one channel.
  typedef struct packed {
    logic [FREQ_W-1:0]        center;
    logic [TAMP_W-1:0]        amp;
    logic [FREQ_W-1:0]        sb_off;
    logic signed [GAIN_W-1:0] gain;
    coef_t                    coef;
    ctrl_t                    ctrl;
  } chan_cfg_t;

  // Readback values of one channel.
  typedef struct packed {
    logic [FREQ_W-1:0]        freq;
    logic signed [ERR_W-1:0]  err;
    logic signed [ERR_W-1:0]  inph;
    coef_t                    coef;
    logic                     cal_done;
  } chan_status_t;

  // round(32767 * cos(2*pi*i/2^LUT_AW)); the sine is read a quarter turn later.
  function automatic lut_rom_t make_cos_rom();
    lut_rom_t r;
    for (int i = 0; i < 2**LUT_AW; i++)
      r[i] = lut_t'($rtoi($floor(32767.0 * $cos(6.283185307179586 * i / (2.0**LUT_AW)) + 0.5)));
    return r;
  endfunction

  // The oscillator table, computed once for all oscillators.
  localparam lut_rom_t COS_ROM = make_cos_rom();

endpackage
