// tb_tone_gen -- checks drive tone and sidebands against a floating-point
// model of the three phases: drive only, drive plus sidebands (1/8
// amplitude) and everything off.
module tb_tone_gen;
  import smurf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] freq, sb;
  logic [14:0] amp;
  logic tone_en, sb_en;
  tone_smp_t tx;
  lo_t l0, l1, l2;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  longint unsigned p0, p1, p2;

  tone_gen dut (.clk, .rst_n, .freq, .sb_offset(sb), .amp, .tone_en, .sb_en, .tx, .lo_main(l0), .lo_lo(l1), .lo_hi(l2));
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real cs(longint unsigned p, bit sn);
    real ang = 6.283185307179586 * real'(p >> 22) / 1024.0;
    return sn ? $sin(ang) : $cos(ang);
  endfunction

  initial begin
    real er, ei, am, asb;
    freq = 32'h0800_0000; sb = 32'h0040_0000; amp = 15'd20000; tone_en = 1; sb_en = 0;
    p0 = 0; p1 = 0; p2 = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(posedge clk);  // tx now holds the sample of the phases before this edge
      #1;
      am  = tone_en ? real'(amp) : 0.0;
      asb = sb_en ? real'(amp >> 3) : 0.0;
      er = am * cs(p0, 0) + asb * (cs(p1, 0) + cs(p2, 0));
      ei = am * cs(p0, 1) + asb * (cs(p1, 1) + cs(p2, 1));
      if (i > 0) begin
        checks++;
        if (fabs(real'(tx.re) - er) > 4.0 || fabs(real'(tx.im) - ei) > 4.0) begin
          failures++;
          if (failures < 10) $display("i=%0d tx=%0d,%0d exp=%f,%f", i, tx.re, tx.im, er, ei);
        end
      end
      p0 = (p0 + freq) & 64'hFFFF_FFFF;
      p1 = (p1 + freq - sb) & 64'hFFFF_FFFF;
      p2 = (p2 + freq + sb) & 64'hFFFF_FFFF;
      if (i == 1000) sb_en = 1;
      if (i == 2000) begin tone_en = 0; sb_en = 0; end
      if (i == 2500) begin tone_en = 1; sb_en = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
