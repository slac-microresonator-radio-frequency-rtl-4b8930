// tb_dds_nco -- checks the oscillator against cos/sin of an independently
// accumulated phase, including a frequency change (phase continuity) and a
// negative frequency.
module tb_dds_nco;
  import smurf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] freq;
  lut_t c, s;
  logic [31:0] ph;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  longint unsigned ref_ph;

  dds_nco dut (.clk, .rst_n, .freq, .cos_o(c), .sin_o(s), .phase_o(ph));
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_sample();
    real ang, ec, es;
    int idx;
    idx = int'(ref_ph >> 22);
    ang = 6.283185307179586 * idx / 1024.0;
    ec = 32767.0 * $cos(ang); es = 32767.0 * $sin(ang);
    checks++;
    if (fabs(real'(c) - ec) > 1.0 || fabs(real'(s) - es) > 1.0 || ph != 32'(ref_ph)) begin
      failures++;
      if (failures < 10) $display("mismatch ph=%h/%h cos=%0d exp=%f sin=%0d exp=%f", ph, ref_ph, c, ec, s, es);
    end
  endtask

  initial begin
    freq = 32'h0123_4567; ref_ph = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      ref_ph = (ref_ph + freq) & 64'hFFFF_FFFF;
      check_sample();
      if (i == 1000) freq = 32'hF000_0001;   // negative frequency
      if (i == 2000) freq = 32'h4000_0000;   // quarter of the sample rate
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
