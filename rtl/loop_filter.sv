// loop_filter -- feedback loop filter of one tracked tone.
//
// In closed-loop mode every frequency-error estimate moves the tone:
//   freq <= freq + (gain * err) >>> GAIN_SHIFT
// a first-order (integrating) loop whose speed and sign are set by the
// signed gain. In open-loop mode the tone is held at the programmed centre
// frequency, and leaving closed-loop mode returns it there. The new frequency
// is visible on freq_o one clock after err_valid. Closed-loop tracking and the
// fixed tone of open-loop mode follow the paper; the integrator is this
// design's choice, as the paper does not give the filter.
module loop_filter
  import smurf_pkg::*;
#(
  parameter int GAIN_SHIFT = 4
)(
  input  logic clk,
  input  logic rst_n,
  input  logic [FREQ_W-1:0]        center,
  input  logic                     closed_loop,
  input  logic signed [GAIN_W-1:0] gain,
  input  logic signed [ERR_W-1:0]  err,
  input  logic                     err_valid,
  output logic [FREQ_W-1:0]        freq_o
);
  logic signed [GAIN_W+ERR_W-1:0] step;
  assign step = (GAIN_W+ERR_W)'(gain * err) >>> GAIN_SHIFT;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)           freq_o <= '0;
    else if (!closed_loop) freq_o <= center;
    else if (err_valid)   freq_o <= freq_o + FREQ_W'(step);
endmodule
