// tb_ddc_channel -- feeds an ideal complex tone and an oscillator and checks
// each window's amplitude against (a) an independent 64-bit sum of the same
// products and (b) the analytic value A*32767*L*exp(j*theta)/2^15; a tone
// one bin away must give (almost) zero. Checks one output per window.
module tb_ddc_channel;
  import smurf_pkg::*;
  localparam int L = 64;
  logic clk = 0, rst_n = 0;
  adc_smp_t adc;
  lo_t lo;
  logic dump;
  amp_t amp;
  logic valid;
  int checks = 0, failures = 0, nvalid = 0;
  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  ddc_channel dut (.clk, .rst_n, .adc, .lo, .dump, .amp_o(amp), .valid_o(valid));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint sre, sim;
  longint exp_re, exp_im;
  real ana_re, ana_im;
  bit  chk_pending;

  initial begin
    real w_lo, w_sig, th;
    int n;
    adc = '0; lo = '0; dump = 0; sre = 0; sim = 0; chk_pending = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int win = 0; win < 40; win++) begin
      // windows 0..19: tone on the oscillator frequency, 20..39: one bin away
      w_lo  = 6.283185307179586 * 5.0 / L;
      w_sig = w_lo + ((win >= 20) ? 6.283185307179586 / L : 0.0);
      th    = 0.3 * win;
      sre = 0; sim = 0;
      for (int k = 0; k < L; k++) begin
        n = win * L + k;
        lo.re  = lut_t'($rtoi($floor(32767.0 * $cos(w_lo * n) + 0.5)));
        lo.im  = lut_t'($rtoi($floor(32767.0 * $sin(w_lo * n) + 0.5)));
        adc.re = ADC_W'($rtoi($floor(6000.0 * $cos(w_sig * n + th) + 0.5)));
        adc.im = ADC_W'($rtoi($floor(6000.0 * $sin(w_sig * n + th) + 0.5)));
        sre += longint'(adc.re) * lo.re + longint'(adc.im) * lo.im;
        sim += longint'(adc.im) * lo.re - longint'(adc.re) * lo.im;
        dump = (k == L - 1);
        @(negedge clk);
      end
      exp_re = sre >>> 15; exp_im = sim >>> 15;
      if (win < 20) begin
        ana_re = 6000.0 * 32767.0 * L * $cos(th) / 32768.0;
        ana_im = 6000.0 * 32767.0 * L * $sin(th) / 32768.0;
      end else begin
        ana_re = 0.0; ana_im = 0.0;
      end
      // result appears one clock after the dump sample
      checks++;
      if (!valid || amp.re != AMP_W'(exp_re) || amp.im != AMP_W'(exp_im)) begin
        failures++; $display("win %0d: valid=%0d amp=%0d,%0d exp=%0d,%0d", win, valid, amp.re, amp.im, exp_re, exp_im);
      end
      checks++;
      if (fabs(real'(amp.re) - ana_re) > 200.0 || fabs(real'(amp.im) - ana_im) > 200.0) begin
        failures++; $display("win %0d: amp=%0d,%0d analytic=%f,%f", win, amp.re, amp.im, ana_re, ana_im);
      end
    end
    // windows 0..38 have been reported at a clock edge; the 40th is the one just checked
    checks++; if (nvalid != 39) begin failures++; $display("valid count %0d", nvalid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // one valid per window, never otherwise
  always @(posedge clk) if (rst_n && valid) nvalid++;
endmodule
