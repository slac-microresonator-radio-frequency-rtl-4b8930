// tb_prototype_tracking -- twelve resonators tracked at once by one band.
//
// The operating point of the small demonstration system: twelve resonators
// 300 kHz wide, 6 MHz apart, here at 625 MS/s with the default 480-sample
// window (1.3 MHz updates). A band of 12 channels calibrates with its
// sidebands, then all resonances are moved together in a sawtooth of four
// steps (as a common flux bias would do), first with the loop open and then
// closed. Checks: every tone is on its moved resonance after each closed-loop
// step, open loop leaves every tone at its centre, and the mean drive-tone
// transmission over the sawtooth is lower in closed loop.
module tb_prototype_tracking;
  import smurf_pkg::*;
  localparam int NCH = 12, L = 480;
  localparam int AW = 4 + 4;
  localparam real W32 = 4294967296.0;
  localparam real SPACING = 6.0 / 625.0;        // 6 MHz at 625 MS/s
  localparam real HW = 150.0e3 / 625.0e6;       // half of the 300 kHz width

  logic clk = 0, rst_n = 0;
  adc_smp_t adc;
  dac_smp_t dac;
  logic sat, win;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;

  smurf_band #(.CHANNELS(NCH)) dut (.clk, .rst_n, .adc, .dac, .sat_o(sat), .win_o(win),
                                    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);
  resonator_model #(.NRES(NCH)) u_res (.clk, .dac, .adc);

  always #5 clk = ~clk;

  initial begin
    repeat (400 * L) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  task automatic wr(int c, reg_t r, logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = {4'(c), 4'(r)}; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic rd(int c, reg_t r, output logic [31:0] d);
    @(negedge clk); rd_addr = {4'(c), 4'(r)};
    @(negedge clk); d = rd_data;
  endtask
  function automatic real f_res(int c); return -0.055 + SPACING * c; endfunction
  function automatic logic [31:0] fword(real f);
    real w = f * W32;
    if (w < 0) w += W32;
    return 32'(longint'(w));
  endfunction
  task automatic set_res(real shift);
    for (int c = 0; c < NCH; c++) u_res.f0[c] = f_res(c) + shift;
  endtask
  // sawtooth of the common shift, in half-widths
  function automatic real saw(int k); return HW * (-0.9 + 0.6 * k); endfunction

  task automatic sweep(bit closed, output real mean_t);
    logic [31:0] d, e, p;
    mean_t = 0.0;
    for (int k = 0; k < 4; k++) begin
      set_res(saw(k));
      repeat (40 * L) @(negedge clk);
      for (int c = 0; c < NCH; c++) begin
        real f, want;
        rd(c, REG_FREQ, d);
        f = real'($signed(d)) / W32;
        want = closed ? f_res(c) + saw(k) : f_res(c);
        checks++;
        if (fabs(f - want) > (closed ? 0.1 * HW : 1.0e-8)) begin
          failures++; $display("%s step %0d ch %0d: freq %f expected %f", closed ? "closed" : "open", k, c, f, want);
        end
        rd(c, REG_ERR, e); rd(c, REG_INPH, p);
        mean_t += $sqrt(real'($signed(e)) ** 2 + real'($signed(p)) ** 2) / 65536.0 / (4 * NCH);
      end
    end
  endtask

  initial begin
    logic [31:0] d;
    real t_open, t_closed;
    u_res.a = 0.9985; u_res.theta = 2.0;
    set_res(0.0);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 0; c < NCH; c++) begin
      wr(c, REG_CENTER, fword(f_res(c)));
      wr(c, REG_AMP, 32'd2500);
      wr(c, REG_SB_OFF, fword(2.0 / 7680.0));
      wr(c, REG_GAIN, 32'($signed(-30)));
      wr(c, REG_CTRL, 32'd3);
    end
    repeat (18 * L) @(negedge clk);
    for (int c = 0; c < NCH; c++) begin
      rd(c, REG_STATUS, d);
      checks++; if (!d[0]) begin failures++; $display("ch %0d not calibrated", c); end
      wr(c, REG_CTRL, 32'd9);          // sidebands off, sideband coefficient, open loop
    end
    sweep(0, t_open);
    for (int c = 0; c < NCH; c++) wr(c, REG_CTRL, 32'd13);
    sweep(1, t_closed);
    $display("mean drive-tone transmission over the sawtooth: open %f, closed %f (%f dB)",
             t_open, t_closed, 20.0 * $log10(t_closed / t_open));
    checks++;
    if (!(t_closed < 0.5 * t_open)) begin failures++; $display("no reduction"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
