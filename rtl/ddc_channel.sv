// ddc_channel -- digital down-converter for one tone (integrate and dump).
//
// Each clock the complex ADC sample is multiplied by the conjugate of the
// tone's oscillator, adc * (cos - j sin), and added to an accumulator. On the
// clock where `dump` is high that sample is the last of the window: the sum,
// shifted right by ACC_SHIFT and saturated to AMP_W bits, appears on amp_o
// with valid_o one clock later and the accumulator restarts. The result is the
// tone's complex amplitude over the window. Other tones whose frequency differs
// by a multiple of (sample rate / window length) sum to zero exactly. That the
// tones are read back by down-conversion follows the paper; the boxcar window
// is this design's choice (the paper does not describe its channeliser).
module ddc_channel
  import smurf_pkg::*;
#(
  parameter int ACC_SHIFT = 15,
  parameter int ACC_W     = 48
)(
  input  logic     clk,
  input  logic     rst_n,
  input  adc_smp_t adc,
  input  lo_t      lo,
  input  logic     dump,
  output amp_t     amp_o,
  output logic     valid_o
);
  logic signed [ADC_W+LUT_W:0] p_re, p_im;
  logic signed [ACC_W-1:0]     acc_re, acc_im, sum_re, sum_im;

  // (a + jb)(c - jd) = (ac + bd) + j(bc - ad)
  assign p_re = (ADC_W+LUT_W+1)'(adc.re * lo.re) + (ADC_W+LUT_W+1)'(adc.im * lo.im);
  assign p_im = (ADC_W+LUT_W+1)'(adc.im * lo.re) - (ADC_W+LUT_W+1)'(adc.re * lo.im);
  assign sum_re = acc_re + ACC_W'(p_re);
  assign sum_im = acc_im + ACC_W'(p_im);

  function automatic logic signed [AMP_W-1:0] sat(input logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] s;
    s = v >>> ACC_SHIFT;
    if (s > ACC_W'(2**(AMP_W-1) - 1))      return {1'b0, {(AMP_W-1){1'b1}}};
    else if (s < -ACC_W'(2**(AMP_W-1)))    return {1'b1, {(AMP_W-1){1'b0}}};
    else                                   return AMP_W'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      acc_re <= '0; acc_im <= '0; amp_o <= '0; valid_o <= 1'b0;
    end else begin
      valid_o <= dump;
      if (dump) begin
        amp_o.re <= sat(sum_re);
        amp_o.im <= sat(sum_im);
        acc_re   <= '0;
        acc_im   <= '0;
      end else begin
        acc_re <= sum_re;
        acc_im <= sum_im;
      end
    end
endmodule
