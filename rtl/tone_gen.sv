// tone_gen -- tone synthesiser of one resonator channel.
//
// Three dds_nco oscillators run at freq, freq - sb_offset and freq + sb_offset.
// The drive tone has amplitude `amp` (DAC LSB); the two calibration sidebands
// have amp >> SB_SHIFT (1/8, about 18 dB down). The complex sample
//   tx = amp*e^{j ph0} + (amp>>3)*(e^{j ph-} + e^{j ph+})
// is registered, so `tx` is one clock behind the oscillator outputs. The three
// oscillator outputs are also brought out (lo_*) for the down-converters,
// which demodulate with the same phases. A drive tone on the resonance with
// two weaker sidebands follows the paper; the amplitude ratio as a power of
// two and the register widths are this design's choice.
module tone_gen
  import smurf_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [FREQ_W-1:0] freq,
  input  logic [FREQ_W-1:0] sb_offset,
  input  logic [TAMP_W-1:0] amp,
  input  logic              tone_en,
  input  logic              sb_en,
  output tone_smp_t         tx,
  output lo_t               lo_main,
  output lo_t               lo_lo,
  output lo_t               lo_hi
);
  logic [FREQ_W-1:0] f_lo, f_hi;

  assign f_lo = freq - sb_offset;
  assign f_hi = freq + sb_offset;

  dds_nco u_main (.clk, .rst_n, .freq(freq), .cos_o(lo_main.re), .sin_o(lo_main.im), .phase_o());
  dds_nco u_lo   (.clk, .rst_n, .freq(f_lo), .cos_o(lo_lo.re),   .sin_o(lo_lo.im),   .phase_o());
  dds_nco u_hi   (.clk, .rst_n, .freq(f_hi), .cos_o(lo_hi.re),   .sin_o(lo_hi.im),   .phase_o());

  // amplitude (unsigned, TAMP_W) times Q1.15 table value, scaled back by 2^15
  function automatic logic signed [TONE_W-1:0] scale(input logic [TAMP_W-1:0] a, input lut_t v);
    logic signed [TAMP_W+LUT_W:0] p;
    p = $signed({1'b0, a}) * v;
    return TONE_W'(p >>> (LUT_W-1));
  endfunction

  logic [TAMP_W-1:0] a_main, a_sb;
  assign a_main = tone_en ? amp : '0;
  assign a_sb   = sb_en   ? (amp >> SB_SHIFT) : '0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tx <= '0;
    else begin
      tx.re <= scale(a_main, lo_main.re) + scale(a_sb, lo_lo.re) + scale(a_sb, lo_hi.re);
      tx.im <= scale(a_main, lo_main.im) + scale(a_sb, lo_lo.im) + scale(a_sb, lo_hi.im);
    end
endmodule
