// tb_smurf_top_full -- one complete tracking operation at the default size.
//
// smurf_top with its default parameters: 8 bands of 512 channels, 480-sample
// windows (1.3 MHz updates at 625 MS/s). Two channels in band 0 and two in
// band 7 are driven into resonator models whose line width (300 kHz) and
// sideband detuning (2/7680 of the sample rate, about half the line width)
// follow the readout's intended operating point; the other channels stay
// idle. Steps: configure, sideband calibration, closed-loop tracking of a
// resonance step of half a line width, readback of the tracked frequency.
// Also checks the 480-sample update period.
module tb_smurf_top_full;
  import smurf_pkg::*;
  localparam int NB = 8, NCH = 512, L = 480;
  localparam int AW = 3 + 9 + 4;
  localparam real W32 = 4294967296.0;
  localparam int NACT = 2;
  localparam int BANDS [2] = '{0, 7};

  logic clk = 0, rst_n = 0;
  adc_smp_t adc [NB];
  dac_smp_t dac [NB];
  logic sat [NB], win [NB];
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0, n_win = 0;

  smurf_top dut (.clk, .rst_n, .adc, .dac, .sat, .win, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  resonator_model #(.NRES(NACT)) u_res0 (.clk, .dac(dac[0]), .adc(adc[0]));
  resonator_model #(.NRES(NACT)) u_res7 (.clk, .dac(dac[7]), .adc(adc[7]));
  for (genvar b = 1; b < 7; b++) begin : g_idle
    assign adc[b] = '0;
  end

  always #5 clk = ~clk;

  initial begin
    repeat (60 * L) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction
  function automatic logic [AW-1:0] addr(int b, int c, reg_t r);
    return {3'(b), 9'(c), 4'(r)};
  endfunction
  task automatic wr(int b, int c, reg_t r, logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = addr(b, c, r); wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic rd(int b, int c, reg_t r, output logic [31:0] d);
    @(negedge clk); rd_addr = addr(b, c, r);
    @(negedge clk); @(negedge clk); d = rd_data;
  endtask
  // channels 37 and 300 of each active band; resonances in cycles per sample
  function automatic int chan(int i); return i == 0 ? 37 : 300; endfunction
  function automatic real f_res(int bi, int i); return (i == 0 ? 0.0731 : -0.2113) + 0.01 * bi; endfunction
  function automatic logic [31:0] fword(real f);
    real w = f * W32;
    if (w < 0) w += W32;
    return 32'(longint'(w));
  endfunction
  task automatic set_res(real shift);
    for (int i = 0; i < NACT; i++) begin
      u_res0.f0[i] = f_res(0, i) + shift;
      u_res7.f0[i] = f_res(1, i) + shift;
    end
  endtask

  int last_win = -1, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && win[7]) begin
      if (last_win >= 0) begin
        checks++;
        if (cyc - last_win != L) begin failures++; $display("window period %0d", cyc - last_win); end
        else n_win++;
      end
      last_win = cyc;
    end
  end

  localparam real SHIFT = 1.2e-4;   // half of the 300 kHz line width at 625 MS/s

  initial begin
    logic [31:0] d;
    u_res0.a = 0.9985; u_res7.a = 0.9985;
    u_res0.theta = 0.4; u_res7.theta = -1.3;
    set_res(0.0);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int bi = 0; bi < 2; bi++)
      for (int i = 0; i < NACT; i++) begin
        wr(BANDS[bi], chan(i), REG_CENTER, fword(f_res(bi, i)));
        wr(BANDS[bi], chan(i), REG_AMP, 32'd6000);
        wr(BANDS[bi], chan(i), REG_SB_OFF, fword(2.0 / 7680.0));
        wr(BANDS[bi], chan(i), REG_GAIN, 32'($signed(-30)));
        wr(BANDS[bi], chan(i), REG_CTRL, 32'd3);
      end
    repeat (18 * L) @(negedge clk);
    for (int bi = 0; bi < 2; bi++)
      for (int i = 0; i < NACT; i++) begin
        rd(BANDS[bi], chan(i), REG_STATUS, d);
        checks++; if (!d[0]) begin failures++; $display("band %0d ch %0d not calibrated", BANDS[bi], chan(i)); end
        wr(BANDS[bi], chan(i), REG_CTRL, 32'd13);   // tone, closed loop, sideband coefficient
      end
    set_res(SHIFT);
    repeat (30 * L) @(negedge clk);
    for (int bi = 0; bi < 2; bi++)
      for (int i = 0; i < NACT; i++) begin
        real f;
        rd(BANDS[bi], chan(i), REG_FREQ, d);
        f = real'($signed(d)) / W32;
        checks++;
        if (fabs(f - (f_res(bi, i) + SHIFT)) > 0.15 * SHIFT) begin
          failures++; $display("band %0d ch %0d freq %f expected %f", BANDS[bi], chan(i), f, f_res(bi, i) + SHIFT);
        end
      end
    // an idle channel stays at frequency zero
    rd(3, 100, REG_FREQ, d);
    checks++; if (d != 0) begin failures++; $display("idle channel moved"); end
    checks++; if (n_win < 40) begin failures++; $display("only %0d windows", n_win); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
