// smurf_top -- tone-tracking readout for the full system of NUM_BANDS bands.
//
// Each band is one smurf_band attached to its own DAC/ADC pair (the system
// has eight, each covering a 500 MHz block, so 8 x 512 = 4096 resonators in
// 4 GHz). The bands run independently from the same clock; the converters,
// serial links, mixers and oscillators sit outside and appear here only as
// the per-band sample ports adc[b] and dac[b].
//
// Host port: register address = {band, channel, 4-bit register index}.
// Writes take effect next clock; rd_data returns the addressed register two
// clocks after rd_addr (one in the band, one here).
module smurf_top
  import smurf_pkg::*;
#(
  parameter int NUM_BANDS = 8,
  parameter int CHANNELS  = 512,
  parameter int ACC_LEN   = 480,
  parameter int ACC_SHIFT = 15,
  parameter int CAL_LOG2  = 4,
  localparam int B_W      = (NUM_BANDS > 1) ? $clog2(NUM_BANDS) : 1,
  localparam int CH_W     = (CHANNELS > 1) ? $clog2(CHANNELS) : 1,
  localparam int BADDR_W  = CH_W + 4,
  localparam int ADDR_W   = B_W + BADDR_W
)(
  input  logic              clk,
  input  logic              rst_n,
  input  adc_smp_t          adc   [NUM_BANDS],
  output dac_smp_t          dac   [NUM_BANDS],
  output logic              sat   [NUM_BANDS],
  output logic              win   [NUM_BANDS],
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [31:0]       wr_data,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [31:0]       rd_data
);
  logic [31:0]    brd [NUM_BANDS];
  logic [B_W-1:0] wr_b, rd_b_q;

  assign wr_b = wr_addr[ADDR_W-1 -: B_W];

  for (genvar b = 0; b < NUM_BANDS; b++) begin : g_band
    smurf_band #(.CHANNELS(CHANNELS), .ACC_LEN(ACC_LEN), .ACC_SHIFT(ACC_SHIFT), .CAL_LOG2(CAL_LOG2)) u_band (
      .clk, .rst_n, .adc(adc[b]), .dac(dac[b]), .sat_o(sat[b]), .win_o(win[b]),
      .wr_en(wr_en && wr_b == B_W'(b)), .wr_addr(wr_addr[BADDR_W-1:0]), .wr_data,
      .rd_addr(rd_addr[BADDR_W-1:0]), .rd_data(brd[b]));
  end

  logic [31:0] sel;
  always_comb begin
    sel = brd[0];
    for (int b = 0; b < NUM_BANDS; b++)
      if (rd_b_q == B_W'(b)) sel = brd[b];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rd_b_q <= '0; rd_data <= '0;
    end else begin
      rd_b_q  <= rd_addr[ADDR_W-1 -: B_W];
      rd_data <= sel;
    end
endmodule
