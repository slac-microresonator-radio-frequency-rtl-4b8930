// comb_summer -- adds the tones of all channels into one comb sample.
//
// The CHANNELS complex tone samples are summed at full precision and the
// sum is saturated to the DAC width. dac_o and sat_o (high when either
// component was clipped) are registered: one clock behind the tones. Playing
// the comb of all tones through one DAC follows the paper; saturation rather
// than wrap-around is this design's choice.
module comb_summer
  import smurf_pkg::*;
#(
  parameter int CHANNELS = 512
)(
  input  logic      clk,
  input  logic      rst_n,
  input  tone_smp_t tones [CHANNELS],
  output dac_smp_t  dac_o,
  output logic      sat_o
);
  localparam int SW = TONE_W + $clog2(CHANNELS) + 1;
  localparam logic signed [SW-1:0] MAXV = SW'(2**(DAC_W-1) - 1);
  localparam logic signed [SW-1:0] MINV = -SW'(2**(DAC_W-1));

  logic signed [SW-1:0] s_re, s_im;

  always_comb begin
    s_re = '0;
    s_im = '0;
    for (int c = 0; c < CHANNELS; c++) begin
      s_re += SW'(tones[c].re);
      s_im += SW'(tones[c].im);
    end
  end

  function automatic logic signed [DAC_W-1:0] clip(input logic signed [SW-1:0] v);
    if (v > MAXV)      return DAC_W'(MAXV);
    else if (v < MINV) return DAC_W'(MINV);
    else               return DAC_W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      dac_o <= '0; sat_o <= 1'b0;
    end else begin
      dac_o.re <= clip(s_re);
      dac_o.im <= clip(s_im);
      sat_o    <= (s_re > MAXV) || (s_re < MINV) || (s_im > MAXV) || (s_im < MINV);
    end
endmodule
