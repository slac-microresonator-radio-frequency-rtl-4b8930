// tb_smurf_band -- test of one band with a resonator model.
//
// One band of four channels, 64-sample windows. The band's DAC output
// drives a resonator_model whose ADC output returns to the band. The test
// runs the whole procedure and counts each mechanism:
//   register write/readback; update strobe every ACC_LEN samples;
//   sideband calibration; closed-loop tracking of a resonance step with the
//   sideband coefficient; open-loop hold at the centre; tracking with a
//   host-written coefficient; lower drive-tone transmission in closed loop
//   than in open loop; DAC saturation.
module tb_smurf_band;
  import smurf_pkg::*;
  localparam int NB = 1, NCH = 4, L = 64;
  localparam int AW = 2 + 4;
  localparam real W32 = 4294967296.0;

  logic clk = 0, rst_n = 0;
  adc_smp_t adc [NB];
  dac_smp_t dac [NB];
  logic sat [NB], win [NB];
  logic wr_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  int n_rw = 0, n_win = 0, n_cal = 0, n_track_sb = 0, n_open = 0, n_track_host = 0, n_power = 0, n_sat = 0;

  smurf_band #(.CHANNELS(NCH), .ACC_LEN(L)) dut (
    .clk, .rst_n, .adc(adc[0]), .dac(dac[0]), .sat_o(sat[0]), .win_o(win[0]),
    .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  for (genvar b = 0; b < NB; b++) begin : g_res
    resonator_model #(.NRES(NCH)) u_res (.clk, .dac(dac[b]), .adc(adc[b]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [AW-1:0] addr(int b, int c, reg_t r);
    return {2'(c + 0 * b), 4'(r)};
  endfunction
  task automatic wr(int b, int c, reg_t r, logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_addr = addr(b, c, r); wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic rd(int b, int c, reg_t r, output logic [31:0] d);
    @(negedge clk); rd_addr = addr(b, c, r);
    @(negedge clk); d = rd_data;
  endtask
  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  // resonance frequency in cycles per sample
  function automatic real f_res(int b, int c);
    return (3.0 + 9.0 * c + 3.0 * b) / L - 0.0003 * c;
  endfunction
  task automatic set_res(real shift);
    for (int c = 0; c < NCH; c++) begin
      g_res[0].u_res.f0[c] = f_res(0, c) + shift;
    end
  endtask
  function automatic logic [31:0] fword(real f);
    real w = f * W32;
    if (w < 0) w += W32;
    return 32'(longint'(w));
  endfunction
  function automatic real fw2f(logic [31:0] w);
    return real'($signed(w)) / W32;
  endfunction
  task automatic windows(int n); repeat (n * L) @(negedge clk); endtask

  // update strobe cadence
  int last_win = -1, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && win[0]) begin
      if (last_win >= 0) begin
        checks++;
        if (cyc - last_win != L) begin failures++; $display("window period %0d", cyc - last_win); end
        else n_win++;
      end
      last_win = cyc;
    end
    if (rst_n && sat[0]) n_sat++;
  end

  // drive-tone transmission |inph + j err| (Q16) for all channels
  task automatic mean_mag(output real m);
    logic [31:0] e, p;
    m = 0.0;
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < NCH; c++) begin
        rd(b, c, REG_ERR, e); rd(b, c, REG_INPH, p);
        m += $sqrt(real'($signed(e)) ** 2 + real'($signed(p)) ** 2) / (NB * NCH);
      end
  endtask

  task automatic check_tracking(real shift, real tol, ref int cnt, input string what);
    logic [31:0] f;
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < NCH; c++) begin
        rd(b, c, REG_FREQ, f);
        checks++;
        if (fabs(fw2f(f) - (f_res(b, c) + shift)) > tol) begin
          failures++; $display("%s: band %0d ch %0d freq %f expected %f", what, b, c, fw2f(f), f_res(b, c) + shift);
        end else cnt++;
      end
  endtask

  localparam int CTRL_TONE = 1, CTRL_SB = 2, CTRL_CL = 4, CTRL_USESB = 8;

  initial begin
    logic [31:0] d;
    real m_cl, m_ol;
    for (int b = 0; b < NB; b++) adc[b] = '0;
    repeat (3) @(posedge clk);
    g_res[0].u_res.theta = 1.0;      // cable / mixer phase of band 0
    set_res(0.0);
    @(negedge clk) rst_n = 1;

    // --- configure every channel: tone on its resonance, sidebands on, open loop
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < NCH; c++) begin
        wr(b, c, REG_CENTER, fword(f_res(b, c)));
        wr(b, c, REG_AMP, 32'd6000);
        wr(b, c, REG_SB_OFF, fword(2.0 / 1024.0));
        wr(b, c, REG_GAIN, 32'($signed(-250)));
        wr(b, c, REG_CTRL, CTRL_TONE | CTRL_SB);
      end
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < NCH; c++) begin
        rd(b, c, REG_CENTER, d); checks++;
        if (d != fword(f_res(b, c))) begin failures++; $display("readback centre %h", d); end else n_rw++;
        rd(b, c, REG_GAIN, d); checks++;
        if ($signed(d) != -250) begin failures++; $display("readback gain %h", d); end else n_rw++;
      end

    // --- sideband calibration (16 windows per period; wait for two periods)
    windows(34);
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < NCH; c++) begin
        rd(b, c, REG_STATUS, d); checks++;
        if (d[0] !== 1'b1) begin failures++; $display("band %0d ch %0d not calibrated", b, c); end else n_cal++;
      end
    // on the resonance the rotated transmission should lie near the real axis
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < NCH; c++) begin
        logic [31:0] e, p;
        wr(b, c, REG_CTRL, CTRL_TONE | CTRL_USESB);   // sidebands off, coefficient kept
      end
    windows(4);
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < NCH; c++) begin
        logic [31:0] e, p;
        rd(b, c, REG_ERR, e); rd(b, c, REG_INPH, p);
        checks++;
        if (fabs(real'($signed(e))) > 0.25 * fabs(real'($signed(p))) + 1500.0 || $signed(p) <= 0) begin
          failures++; $display("calibrated rotation off: band %0d ch %0d err %0d inph %0d", b, c, $signed(e), $signed(p));
        end
      end

    // --- open loop with shifted resonances: tones stay at the centre
    set_res(0.0009);
    windows(10);
    check_tracking(0.0, 1.0e-7, n_open, "open loop");
    mean_mag(m_ol);

    // --- closed loop with the sideband coefficient: tones follow
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < NCH; c++) wr(b, c, REG_CTRL, CTRL_TONE | CTRL_CL | CTRL_USESB);
    windows(40);
    check_tracking(0.0009, 0.00012, n_track_sb, "closed loop (sideband coefficient)");
    mean_mag(m_cl);
    checks++;
    if (!(m_cl < 0.7 * m_ol)) begin failures++; $display("closed-loop transmission %f not below open-loop %f", m_cl, m_ol); end
    else n_power++;
    $display("drive-tone transmission: open loop %f, closed loop %f (Q16)", m_ol / 65536.0, m_cl / 65536.0);

    // --- host-written coefficient: copy the calibrated one and track a step back
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < NCH; c++) begin
        logic [31:0] cr, ci;
        rd(b, c, REG_ACOEF_RE, cr); rd(b, c, REG_ACOEF_IM, ci);
        wr(b, c, REG_COEF_RE, cr); wr(b, c, REG_COEF_IM, ci);
        wr(b, c, REG_CTRL, CTRL_TONE | CTRL_CL);
      end
    set_res(-0.0006);
    windows(40);
    check_tracking(-0.0006, 0.00012, n_track_host, "closed loop (host coefficient)");

    // --- overload: full-scale drive on every channel clips the DAC
    for (int c = 0; c < NCH; c++) wr(0, c, REG_AMP, 32'd32767);
    windows(2);

    // mechanism coverage
    checks++; if (n_rw == 0)         begin failures++; $display("no register readback"); end
    checks++; if (n_win < 10)        begin failures++; $display("too few windows"); end
    checks++; if (n_cal == 0)        begin failures++; $display("no calibration"); end
    checks++; if (n_track_sb == 0)   begin failures++; $display("no sideband-coefficient tracking"); end
    checks++; if (n_open == 0)       begin failures++; $display("no open-loop hold"); end
    checks++; if (n_track_host == 0) begin failures++; $display("no host-coefficient tracking"); end
    checks++; if (n_power == 0)      begin failures++; $display("no power reduction"); end
    checks++; if (n_sat == 0)        begin failures++; $display("no DAC saturation"); end
    $display("mechanisms: readback=%0d windows=%0d calibrated=%0d track_sb=%0d open_hold=%0d track_host=%0d power=%0d saturated_samples=%0d",
             n_rw, n_win, n_cal, n_track_sb, n_open, n_track_host, n_power, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
