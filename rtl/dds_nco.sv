// dds_nco -- direct digital synthesis oscillator.
//
// A FREQ_W-bit phase accumulator advances by `freq` every clock; its top
// LUT_AW bits address a cosine table, and the sine is the same table read a
// quarter turn (2^(LUT_AW-2) entries) earlier, so cos_o + j*sin_o =
// exp(j*2*pi*phase/2^FREQ_W). The outputs follow the phase register with no
// extra latency: a new `freq` changes the phase one clock later and the phase
// is continuous across frequency changes. The table (smurf_pkg::COS_ROM)
// is computed at elaboration. That tones are made by DDS follows the paper; accumulator and
// table sizes are this design's choice.
module dds_nco
  import smurf_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [FREQ_W-1:0] freq,
  output lut_t              cos_o,
  output lut_t              sin_o,
  output logic [FREQ_W-1:0] phase_o
);
  logic [FREQ_W-1:0] phase;
  logic [LUT_AW-1:0] a_cos, a_sin;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) phase <= '0;
    else        phase <= phase + freq;

  // sin(x) = cos(x - pi/2)
  assign a_cos   = phase[FREQ_W-1 -: LUT_AW];
  assign a_sin   = a_cos - LUT_AW'(2**(LUT_AW-2));
  assign cos_o   = COS_ROM[a_cos];
  assign sin_o   = COS_ROM[a_sin];
  assign phase_o = phase;
endmodule
