// tb_sideband_ref -- feeds constant and random sideband amplitudes and checks
// the coefficient against 2^32*conj(S)/|S|^2 (S = per-window mean of
// S_lo+S_hi) computed in floating point; checks that nothing completes
// while the sidebands are off and that a result arrives within one period.
module tb_sideband_ref;
  import smurf_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, valid = 0;
  amp_t lo, hi;
  coef_t coef;
  logic cv;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  sideband_ref dut (.clk, .rst_n, .en, .lo_amp(lo), .hi_amp(hi), .valid, .coef_o(coef), .coef_valid_o(cv));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_period(input int lre, lim, hre, him, output longint sre, output longint sim);
    sre = 0; sim = 0;
    for (int w = 0; w < 16; w++) begin
      lo.re = AMP_W'(lre + w - 8); lo.im = AMP_W'(lim); hi.re = AMP_W'(hre); hi.im = AMP_W'(him - w + 8);
      sre += lre + w - 8 + hre; sim += lim + him - w + 8;
      @(negedge clk) valid = 1;
      @(negedge clk) valid = 0;
      repeat (62) @(negedge clk);
    end
  endtask

  initial begin
    longint sre, sim;
    real mr, mi, d, er, ei;
    int t0;
    lo = '0; hi = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // sidebands off: valid strobes must not start a calibration
    run_period(1000, 2000, 3000, 4000, sre, sim);
    repeat (200) @(negedge clk);
    checks++; if (cv) begin failures++; $display("calibrated while disabled"); end
    en = 1;
    for (int t = 0; t < 6; t++) begin
      int a, b, c, e;
      a = (t == 0) ? 3000 : int'($urandom_range(60000)) - 30000;
      b = (t == 0) ? -500 : int'($urandom_range(60000)) - 30000;
      c = (t == 0) ? 2800 : int'($urandom_range(60000)) - 30000;
      e = (t == 0) ? -700 : int'($urandom_range(60000)) - 30000;
      run_period(a, b, c, e, sre, sim);
      t0 = 0;
      while (t0 < 300) begin @(negedge clk); t0++; if (dut.state == 2'd0 && !dut.go && !dut.div_busy) break; end
      mr = real'(sre >>> 4); mi = real'(sim >>> 4);
      d  = mr * mr + mi * mi;
      er = 4294967296.0 * mr / d; ei = -4294967296.0 * mi / d;
      if (er > 2147483647.0) er = 2147483647.0; if (er < -2147483647.0) er = -2147483647.0;
      if (ei > 2147483647.0) ei = 2147483647.0; if (ei < -2147483647.0) ei = -2147483647.0;
      checks++;
      if (!cv || fabs(real'(coef.re) - er) > 1.5 || fabs(real'(coef.im) - ei) > 1.5 || t0 >= 300) begin
        failures++; $display("t=%0d cv=%0d coef=%0d,%0d exp=%f,%f after %0d", t, cv, coef.re, coef.im, er, ei, t0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
