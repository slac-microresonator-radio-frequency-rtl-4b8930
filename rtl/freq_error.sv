// freq_error -- phase rotation of the drive tone's complex amplitude.
//
// The window's complex amplitude of the drive tone is multiplied by the
// rotation coefficient, t = amp * coef / 2^ROT_FRAC, which normalises it to
// the off-resonance transmission. On the resonance t lies on the real axis,
// and near it Im(t) is proportional to the distance between tone and
// resonance: err_o = Im(t) is the frequency-error estimate, inph_o = Re(t).
// Both are Q16 (65536 = 1.0), saturated to ERR_W bits, and appear with
// valid_o one clock after valid. Rotating so that the quadrature component
// measures the frequency error follows the paper; the fixed-point format is
// this design's choice.
module freq_error
  import smurf_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  amp_t  amp,
  input  coef_t coef,
  input  logic  valid,
  output logic signed [ERR_W-1:0] err_o,
  output logic signed [ERR_W-1:0] inph_o,
  output logic valid_o
);
  localparam int PW = AMP_W + COEF_W + 1;
  localparam int SH = ROT_FRAC - 16;

  logic signed [PW-1:0] t_re, t_im;
  assign t_re = PW'(amp.re * coef.re) - PW'(amp.im * coef.im);
  assign t_im = PW'(amp.re * coef.im) + PW'(amp.im * coef.re);

  function automatic logic signed [ERR_W-1:0] sat(input logic signed [PW-1:0] v);
    logic signed [PW-1:0] s;
    s = v >>> SH;
    if (s > PW'(2**(ERR_W-1) - 1))       return {1'b0, {(ERR_W-1){1'b1}}};
    else if (s < -PW'(2**(ERR_W-1)))     return {1'b1, {(ERR_W-1){1'b0}}};
    else                                 return ERR_W'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      err_o <= '0; inph_o <= '0; valid_o <= 1'b0;
    end else begin
      valid_o <= valid;
      if (valid) begin
        err_o  <= sat(t_im);
        inph_o <= sat(t_re);
      end
    end
endmodule
