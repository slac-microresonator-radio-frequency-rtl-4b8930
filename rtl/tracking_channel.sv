// tracking_channel -- one resonator's closed tone-tracking loop.
//
// Holds the channel's host registers and connects
//   tone_gen -> (DAC ... resonator ... ADC) -> 3 x ddc_channel
//   sideband ddc outputs -> sideband_ref -> rotation coefficient
//   drive ddc output -> freq_error -> loop_filter -> tone_gen frequency.
// The drive tone's down-converter uses the drive oscillator itself, so the
// demodulation follows the tone as it moves. The coefficient is either the
// host's (from an earlier network-analyser or amplitude scan) or, with
// ctrl.use_sb_cal, the latest sideband calibration; the loop only integrates
// once a usable coefficient exists.
//
// Timing: win_end marks the last sample of a window; the window's amplitudes
// are valid 1 clock later, the error 2 clocks later and the new tone
// frequency is used from 3 clocks after win_end. tx is 1 clock behind the
// oscillators. Register writes (wr_en, wr_reg, wr_data) take effect next
// clock; the register map is in smurf_pkg and is this design's choice.
module tracking_channel
  import smurf_pkg::*;
#(
  parameter int ACC_SHIFT = 15,
  parameter int CAL_LOG2  = 4
)(
  input  logic              clk,
  input  logic              rst_n,
  input  adc_smp_t          adc,
  input  logic              win_end,
  input  logic              wr_en,
  input  reg_t              wr_reg,
  input  logic [31:0]       wr_data,
  output tone_smp_t         tx,
  output chan_cfg_t         cfg_o,
  output chan_status_t      status_o
);
  chan_cfg_t cfg;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cfg <= '0;
    else if (wr_en)
      unique case (wr_reg)
        REG_CENTER:  cfg.center  <= wr_data;
        REG_AMP:     cfg.amp     <= wr_data[TAMP_W-1:0];
        REG_SB_OFF:  cfg.sb_off  <= wr_data;
        REG_GAIN:    cfg.gain    <= wr_data[GAIN_W-1:0];
        REG_COEF_RE: cfg.coef.re <= wr_data;
        REG_COEF_IM: cfg.coef.im <= wr_data;
        REG_CTRL:    cfg.ctrl    <= wr_data[3:0];
        default: ;  // read-only or unused index
      endcase

  lo_t   lo_main, lo_lo, lo_hi;
  amp_t  a_main, a_lo, a_hi;
  logic  v_main, v_lo, v_hi;
  logic [FREQ_W-1:0] freq;
  coef_t sb_coef, coef;
  logic  sb_done, coef_ok;
  logic signed [ERR_W-1:0] err, inph;
  logic  err_v;

  tone_gen u_tone (.clk, .rst_n, .freq(freq), .sb_offset(cfg.sb_off), .amp(cfg.amp),
                   .tone_en(cfg.ctrl.tone_en), .sb_en(cfg.ctrl.sb_en), .tx(tx),
                   .lo_main(lo_main), .lo_lo(lo_lo), .lo_hi(lo_hi));

  ddc_channel #(.ACC_SHIFT(ACC_SHIFT)) u_ddc_main (.clk, .rst_n, .adc, .lo(lo_main), .dump(win_end), .amp_o(a_main), .valid_o(v_main));
  ddc_channel #(.ACC_SHIFT(ACC_SHIFT)) u_ddc_lo   (.clk, .rst_n, .adc, .lo(lo_lo),   .dump(win_end), .amp_o(a_lo),   .valid_o(v_lo));
  ddc_channel #(.ACC_SHIFT(ACC_SHIFT)) u_ddc_hi   (.clk, .rst_n, .adc, .lo(lo_hi),   .dump(win_end), .amp_o(a_hi),   .valid_o(v_hi));

  sideband_ref #(.CAL_LOG2(CAL_LOG2)) u_ref (.clk, .rst_n, .en(cfg.ctrl.sb_en), .lo_amp(a_lo), .hi_amp(a_hi),
                                             .valid(v_lo & v_hi), .coef_o(sb_coef), .coef_valid_o(sb_done));

  assign coef    = cfg.ctrl.use_sb_cal ? sb_coef : cfg.coef;
  assign coef_ok = !cfg.ctrl.use_sb_cal || sb_done;

  freq_error u_err (.clk, .rst_n, .amp(a_main), .coef(coef), .valid(v_main),
                    .err_o(err), .inph_o(inph), .valid_o(err_v));

  loop_filter u_loop (.clk, .rst_n, .center(cfg.center), .closed_loop(cfg.ctrl.closed_loop),
                      .gain(cfg.gain), .err(err), .err_valid(err_v && coef_ok), .freq_o(freq));

  assign cfg_o             = cfg;
  assign status_o.freq     = freq;
  assign status_o.err      = err;
  assign status_o.inph     = inph;
  assign status_o.coef     = coef;
  assign status_o.cal_done = sb_done;
endmodule
