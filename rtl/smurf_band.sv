// smurf_band -- processing of one band (one DAC/ADC pair, 500 MHz block).
//
// CHANNELS tracking_channel instances share the band's ADC stream and one
// window counter: every ACC_LEN samples win_o pulses (the last sample of a
// window) and every channel produces a new complex amplitude, frequency
// error and tone frequency in the same clocks. With one complex sample per
// clock at 625 MS/s, ACC_LEN = 480 gives the 1.3 MHz update rate per
// resonator. comb_summer adds the channels' tones into the DAC sample.
//
// Host port: register address = {channel, 4-bit register index} (map in
// smurf_pkg). A write with wr_en updates the register next clock. rd_data is
// the register at rd_addr, registered (one clock of latency). The address
// layout and the shared window are this design's choice; the update rate,
// converter widths and channel count follow the paper.
module smurf_band
  import smurf_pkg::*;
#(
  parameter int CHANNELS  = 512,
  parameter int ACC_LEN   = 480,
  parameter int ACC_SHIFT = 15,
  parameter int CAL_LOG2  = 4,
  localparam int CH_W     = (CHANNELS > 1) ? $clog2(CHANNELS) : 1,
  localparam int ADDR_W   = CH_W + 4
)(
  input  logic              clk,
  input  logic              rst_n,
  input  adc_smp_t          adc,
  output dac_smp_t          dac,
  output logic              sat_o,
  output logic              win_o,
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [31:0]       wr_data,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [31:0]       rd_data
);
  // shared update window
  logic [$clog2(ACC_LEN)-1:0] wcnt;
  logic win_end;
  assign win_end = (wcnt == ($clog2(ACC_LEN))'(ACC_LEN - 1));
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)       wcnt <= '0;
    else if (win_end) wcnt <= '0;
    else              wcnt <= wcnt + 1'b1;
  assign win_o = win_end;

  tone_smp_t    tones [CHANNELS];
  chan_cfg_t    cfgs  [CHANNELS];
  chan_status_t sts   [CHANNELS];

  logic [CH_W-1:0] wr_ch, rd_ch;
  reg_t            wr_reg, rd_reg;
  assign wr_ch  = wr_addr[ADDR_W-1:4];
  assign wr_reg = reg_t'(wr_addr[3:0]);
  assign rd_ch  = rd_addr[ADDR_W-1:4];
  assign rd_reg = reg_t'(rd_addr[3:0]);

  for (genvar c = 0; c < CHANNELS; c++) begin : g_ch
    tracking_channel #(.ACC_SHIFT(ACC_SHIFT), .CAL_LOG2(CAL_LOG2)) u_ch (
      .clk, .rst_n, .adc, .win_end,
      .wr_en(wr_en && wr_ch == CH_W'(c)), .wr_reg, .wr_data,
      .tx(tones[c]), .cfg_o(cfgs[c]), .status_o(sts[c]));
  end

  comb_summer #(.CHANNELS(CHANNELS)) u_comb (.clk, .rst_n, .tones, .dac_o(dac), .sat_o);

  // readback
  chan_cfg_t    rc;
  chan_status_t rs;
  logic [31:0]  rv;
  always_comb begin
    rc = cfgs[0];
    rs = sts[0];
    for (int c = 0; c < CHANNELS; c++)
      if (rd_ch == CH_W'(c)) begin
        rc = cfgs[c];
        rs = sts[c];
      end
    case (rd_reg)
      REG_CENTER:   rv = rc.center;
      REG_AMP:      rv = 32'(rc.amp);
      REG_SB_OFF:   rv = rc.sb_off;
      REG_GAIN:     rv = 32'($signed(rc.gain));
      REG_COEF_RE:  rv = rc.coef.re;
      REG_COEF_IM:  rv = rc.coef.im;
      REG_CTRL:     rv = 32'(rc.ctrl);
      REG_FREQ:     rv = rs.freq;
      REG_ERR:      rv = rs.err;
      REG_INPH:     rv = rs.inph;
      REG_ACOEF_RE: rv = rs.coef.re;
      REG_ACOEF_IM: rv = rs.coef.im;
      REG_STATUS:   rv = 32'(rs.cal_done);
      default:      rv = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rd_data <= '0;
    else        rd_data <= rv;
endmodule
