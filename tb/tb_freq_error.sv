// tb_freq_error -- random amplitudes and coefficients; err/inph must equal
// Im/Re of amp*coef/2^18 (Q16 of amp*coef/2^34), computed with 64-bit
// integers, one clock after valid; plus a worked case on the resonance.
module tb_freq_error;
  import smurf_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0;
  amp_t amp;
  coef_t coef;
  logic signed [31:0] err, inph;
  logic vo;
  int checks = 0, failures = 0;

  freq_error dut (.clk, .rst_n, .amp, .coef, .valid, .err_o(err), .inph_o(inph), .valid_o(vo));
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint sat32(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction

  initial begin
    longint tr, ti;
    amp = '0; coef = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      if (i == 0) begin
        // amplitude 0.07 * 2^16 rotated by 90 degrees, coefficient undoing it (2^34 * -j / 2^16)
        amp.re = 0; amp.im = 24'sd4588; coef.re = 0; coef.im = -32'sd262144;
      end else begin
        amp.re = AMP_W'($urandom); amp.im = AMP_W'($urandom);
        coef.re = $urandom >> ($urandom_range(20)); coef.im = -($urandom >> ($urandom_range(20)));
      end
      tr = (longint'(amp.re) * coef.re - longint'(amp.im) * coef.im) >>> 18;
      ti = (longint'(amp.re) * coef.im + longint'(amp.im) * coef.re) >>> 18;
      valid = 1;
      @(negedge clk) valid = 0;
      checks++;
      if (!vo || err != 32'(sat32(ti)) || inph != 32'(sat32(tr))) begin
        failures++; if (failures < 10) $display("i=%0d err=%0d exp=%0d inph=%0d exp=%0d", i, err, sat32(ti), inph, sat32(tr));
      end
      if (i == 0) begin
        checks++;
        if (err != 0 || inph != 4588) begin failures++; $display("on-resonance case err=%0d inph=%0d", err, inph); end
      end
      @(negedge clk);
      checks++;
      if (vo) begin failures++; $display("valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
