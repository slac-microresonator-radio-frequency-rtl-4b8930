// tb_tracking_channel -- one channel closed through a resonator model.
//
// The channel's tone is clipped to 16 bits as the DAC sample (registered)
// and fed to resonator_model; a 64-sample window strobe is generated here.
// Checks: register writes take effect, the sideband calibration completes,
// open loop holds the centre while the resonance moves, closed loop brings
// the tone onto the moved resonance, and the frequency changes exactly
// three clocks after a window strobe.
module tb_tracking_channel;
  import smurf_pkg::*;
  localparam int L = 64;
  localparam real W32 = 4294967296.0;
  logic clk = 0, rst_n = 0, win_end, wr_en = 0;
  reg_t wr_reg = REG_CENTER;
  logic [31:0] wr_data = '0;
  tone_smp_t tx;
  dac_smp_t dac;
  adc_smp_t adc;
  chan_cfg_t cfg;
  chan_status_t st;
  int checks = 0, failures = 0, cyc = 0;
  function automatic real fabs(real v); return v < 0.0 ? -v : v; endfunction

  tracking_channel dut (.clk, .rst_n, .adc, .win_end, .wr_en, .wr_reg, .wr_data, .tx, .cfg_o(cfg), .status_o(st));
  resonator_model #(.NRES(1)) u_res (.clk, .dac, .adc);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    dac.re <= DAC_W'(tx.re);
    dac.im <= DAC_W'(tx.im);
  end
  assign win_end = (cyc % L) == L - 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(reg_t r, logic [31:0] d);
    @(negedge clk); wr_en = 1; wr_reg = r; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  localparam real F0 = 9.0 / L;

  initial begin
    logic [31:0] f_before;
    int t_upd;
    u_res.f0[0] = F0; u_res.theta = 0.7;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wr(REG_CENTER, 32'($rtoi(F0 * W32)));
    wr(REG_AMP, 32'd8000);
    wr(REG_SB_OFF, 32'($rtoi(2.0 / 1024.0 * W32)));
    wr(REG_GAIN, 32'($signed(-250)));
    wr(REG_CTRL, 32'd3);
    checks++;
    if (cfg.amp != 15'd8000 || cfg.ctrl != 4'd3 || st.freq != 32'($rtoi(F0 * W32))) begin
      failures++; $display("config not applied");
    end
    repeat (34 * L) @(negedge clk);
    checks++; if (!st.cal_done) begin failures++; $display("no calibration"); end
    wr(REG_CTRL, 32'd9);                       // tone, use sideband coefficient, open loop
    u_res.f0[0] = F0 + 0.0008;
    repeat (10 * L) @(negedge clk);
    checks++; if (st.freq != 32'($rtoi(F0 * W32))) begin failures++; $display("open loop moved"); end
    wr(REG_CTRL, 32'd13);                      // closed loop
    repeat (40 * L) @(negedge clk);
    checks++;
    if (fabs(real'(st.freq) / W32 - (F0 + 0.0008)) > 0.0001) begin
      failures++; $display("closed loop freq %f expected %f", real'(st.freq) / W32, F0 + 0.0008);
    end
    // timing of an update: a window strobe, then the new frequency 3 clocks later
    u_res.f0[0] = F0 + 0.0012;
    repeat (3 * L) @(negedge clk);
    while (!win_end) @(negedge clk);
    f_before = st.freq;
    t_upd = 0;
    while (st.freq == f_before && t_upd < L) begin @(negedge clk); t_upd++; end
    checks++;
    if (t_upd != 3) begin failures++; $display("update latency %0d clocks", t_upd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
