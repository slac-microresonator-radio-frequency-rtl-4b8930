// tb_comb_summer -- random tone sets summed in the testbench; the registered
// DAC sample must equal the clipped sum and sat_o must flag clipping; both
// clipped and unclipped cases must occur.
module tb_comb_summer;
  import smurf_pkg::*;
  localparam int N = 12;
  logic clk = 0, rst_n = 0;
  tone_smp_t tones [N];
  dac_smp_t dac;
  logic sat;
  int checks = 0, failures = 0, nsat = 0, nclean = 0;

  comb_summer #(.CHANNELS(N)) dut (.clk, .rst_n, .tones, .dac_o(dac), .sat_o(sat));
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint sr, si, er, ei;
    bit es;
    foreach (tones[c]) tones[c] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int sh;
      sh = (i < 1000) ? 6 : 2;   // small tones first, then large ones that clip
      sr = 0; si = 0;
      foreach (tones[c]) begin
        tones[c].re = TONE_W'($signed(TONE_W'($urandom)) >>> sh);
        tones[c].im = TONE_W'($signed(TONE_W'($urandom)) >>> sh);
        sr += tones[c].re; si += tones[c].im;
      end
      es = (sr > 32767 || sr < -32768 || si > 32767 || si < -32768);
      er = sr > 32767 ? 32767 : (sr < -32768 ? -32768 : sr);
      ei = si > 32767 ? 32767 : (si < -32768 ? -32768 : si);
      @(negedge clk);
      checks++;
      if (dac.re != DAC_W'(er) || dac.im != DAC_W'(ei) || sat != es) begin
        failures++; if (failures < 10) $display("i=%0d dac=%0d,%0d exp=%0d,%0d sat=%0d/%0d", i, dac.re, dac.im, er, ei, sat, es);
      end
      if (es) nsat++; else nclean++;
    end
    checks++;
    if (nsat == 0 || nclean == 0) begin failures++; $display("coverage: sat=%0d clean=%0d", nsat, nclean); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
