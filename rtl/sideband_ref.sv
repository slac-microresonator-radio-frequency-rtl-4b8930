// sideband_ref -- sideband calibration of the rotation and scale.
//
// While the sidebands are on (en), the complex amplitudes of the lower and
// upper sideband are added every window, and 2^CAL_LOG2 windows are summed.
// Their per-window mean S = (sum)/2^CAL_LOG2 stands for the transmission away
// from the resonance notch: with sideband amplitude = drive amplitude / 2^SB_SHIFT
// the reference (normalised to the generated amplitude) is
//   R = S * 2^SB_SHIFT / (2 * A_drive).
// The block then computes the coefficient that divides the drive-tone
// amplitude by A_drive*R, in the format normalised S21 = amp*C/2^ROT_FRAC:
//   C = 2^(ROT_FRAC+1-SB_SHIFT) * conj(S) / |S|^2
// with one seq_divider used twice (real, then imaginary part), about
// 2*(DIV_W+1) clocks after the last window of the period. coef_valid_o stays
// high once a calibration has completed; coef_o holds the last result and is
// saturated to COEF_W bits. Averaging normalised sideband amplitudes into a
// reference follows the paper; the averaging length and the arithmetic are
// this design's choice.
module sideband_ref
  import smurf_pkg::*;
#(
  parameter int CAL_LOG2 = 4
)(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  amp_t lo_amp,
  input  amp_t hi_amp,
  input  logic valid,
  output coef_t coef_o,
  output logic  coef_valid_o
);
  localparam int SW    = AMP_W + 1;             // one window's S_lo + S_hi
  localparam int AW    = SW + CAL_LOG2;         // sum over the period
  localparam int DIV_W = 64;
  localparam int CSH   = ROT_FRAC + 1 - SB_SHIFT; // 32

  typedef enum logic [1:0] {S_ACC, S_DIV_RE, S_DIV_IM} state_t;
  state_t state;

  logic signed [AW-1:0] acc_re, acc_im;
  logic [CAL_LOG2-1:0]  cnt;
  logic signed [SW-1:0] m_re, m_im;          // latched mean S
  logic signed [SW-1:0] s_re, s_im;
  logic signed [AW-1:0] nxt_re, nxt_im;
  logic [DIV_W-1:0]     den;
  logic [DIV_W-1:0]     num;
  logic                 div_start, div_busy, div_done;
  logic [DIV_W-1:0]     quo;

  assign s_re   = SW'(lo_amp.re) + SW'(hi_amp.re);
  assign s_im   = SW'(lo_amp.im) + SW'(hi_amp.im);
  assign nxt_re = acc_re + AW'(s_re);
  assign nxt_im = acc_im + AW'(s_im);

  function automatic logic [SW-1:0] mag(input logic signed [SW-1:0] v);
    return v[SW-1] ? SW'(-v) : SW'(v);
  endfunction

  // |S|^2 and the dividends
  logic signed [2*SW-1:0] sq_re, sq_im;
  assign sq_re = (2*SW)'(m_re) * (2*SW)'(m_re);
  assign sq_im = (2*SW)'(m_im) * (2*SW)'(m_im);
  assign den   = DIV_W'($unsigned(sq_re)) + DIV_W'($unsigned(sq_im));
  assign num = (state == S_DIV_RE) ? (DIV_W'(mag(m_re)) << CSH) : (DIV_W'(mag(m_im)) << CSH);

  seq_divider #(.W(DIV_W)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(num), .divisor(den),
    .busy(div_busy), .done(div_done), .quotient(quo));

  function automatic logic signed [COEF_W-1:0] signed_sat(input logic [DIV_W-1:0] q, input logic neg);
    logic [COEF_W-1:0] m;
    m = (q > DIV_W'(2**(COEF_W-1) - 1)) ? COEF_W'(2**(COEF_W-1) - 1) : COEF_W'(q);
    return neg ? -$signed(m) : $signed(m);
  endfunction

  logic go;  // a division step is pending
  assign div_start = go && !div_busy;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= S_ACC; acc_re <= '0; acc_im <= '0; cnt <= '0; m_re <= '0; m_im <= '0;
      coef_o <= '0; coef_valid_o <= 1'b0; go <= 1'b0;
    end else begin
      if (div_start) go <= 1'b0;
      // accumulate sideband amplitudes over 2^CAL_LOG2 windows
      if (!en) begin
        acc_re <= '0; acc_im <= '0; cnt <= '0;
      end else if (valid) begin
        cnt <= cnt + 1'b1;
        if (&cnt) begin
          acc_re <= '0; acc_im <= '0;
          if (state == S_ACC && (nxt_re != '0 || nxt_im != '0)) begin
            m_re  <= SW'(nxt_re >>> CAL_LOG2);
            m_im  <= SW'(nxt_im >>> CAL_LOG2);
            state <= S_DIV_RE;
            go    <= 1'b1;
          end
        end else begin
          acc_re <= nxt_re; acc_im <= nxt_im;
        end
      end
      // C = conj(S) * 2^CSH / |S|^2, one component per division
      if (div_done) begin
        if (state == S_DIV_RE) begin
          coef_o.re <= signed_sat(quo, m_re[SW-1]);
          state     <= S_DIV_IM;
          go        <= 1'b1;
        end else if (state == S_DIV_IM) begin
          coef_o.im    <= signed_sat(quo, !m_im[SW-1] && m_im != '0);
          coef_valid_o <= 1'b1;
          state        <= S_ACC;
        end
      end
    end
endmodule
