// resonator_model -- behavioural model of the cold readout chain for testbenches.
//
// Not synthesizable (real arithmetic). Stands for DAC, up-mixing, a line of
// NRES notch resonators, amplifier, down-mixing and ADC, all as complex
// baseband. Each resonator r is a one-pole complex filter at f0[r]
// (cycles per sample):
//   b_r[n] = a*exp(j*2*pi*f0[r])*b_r[n-1] + (1-a)*x[n]
//   y[n]   = g * exp(j*theta) * (x[n] - depth * sum_r b_r[n])
// so that S21 = 1 - depth/(1 + j*a*dw/(1-a)) near each resonance: depth 0.93
// puts the bottom of the notch at 0.07 on the real axis, and Im(S21) > 0 when
// the tone lies above the resonance. x is the DAC sample / 2^15; the ADC
// sample is y * 2^13, rounded and clipped to 14 bits, registered (one clock).
module resonator_model
  import smurf_pkg::*;
#(
  parameter int  NRES = 1
)(
  input  logic     clk,
  input  dac_smp_t dac,
  output adc_smp_t adc
);
  real f0 [NRES];
  real a     = 0.99;
  real depth = 0.93;
  real g     = 1.0;
  real theta = 0.0;
  real b_re [NRES];
  real b_im [NRES];

  initial for (int r = 0; r < NRES; r++) begin
    f0[r] = 0.0; b_re[r] = 0.0; b_im[r] = 0.0;
  end

  function automatic logic signed [ADC_W-1:0] q14(input real v);
    real s;
    s = v * 8192.0;
    if (s > 8191.0)  s = 8191.0;
    if (s < -8192.0) s = -8192.0;
    return ADC_W'($rtoi(s >= 0 ? s + 0.5 : s - 0.5));
  endfunction

  always @(posedge clk) begin
    real xr, xi, yr, yi, c, s, nr, ni;
    xr = real'(dac.re) / 32768.0;
    xi = real'(dac.im) / 32768.0;
    yr = xr;
    yi = xi;
    for (int r = 0; r < NRES; r++) begin
      c  = $cos(6.283185307179586 * f0[r]);
      s  = $sin(6.283185307179586 * f0[r]);
      nr = a * (c * b_re[r] - s * b_im[r]) + (1.0 - a) * xr;
      ni = a * (s * b_re[r] + c * b_im[r]) + (1.0 - a) * xi;
      b_re[r] <= nr;
      b_im[r] <= ni;
      yr = yr - depth * nr;
      yi = yi - depth * ni;
    end
    adc.re <= q14(g * ($cos(theta) * yr - $sin(theta) * yi));
    adc.im <= q14(g * ($sin(theta) * yr + $cos(theta) * yi));
  end
endmodule
