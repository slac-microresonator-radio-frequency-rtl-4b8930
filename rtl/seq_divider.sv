// seq_divider -- unsigned restoring divider, one quotient bit per clock.
//
// A pulse on `start` latches dividend and divisor; W clocks later `done`
// pulses for one clock with quotient = dividend / divisor (floor). A zero
// divisor gives an all-ones quotient. `busy` is high while dividing; a start
// while busy is ignored. Helper of sideband_ref.
module seq_divider #(
  parameter int W = 64
)(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  logic [W-1:0]         q, d;
  logic [W-1:0]         r;  // remainder, always below the divisor
  logic [$clog2(W+1)-1:0] n;
  logic [W:0]           r_sh;

  assign r_sh = {r, q[W-1]};

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      q <= '0; d <= '0; r <= '0; n <= '0; busy <= 1'b0; done <= 1'b0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          q <= dividend; d <= divisor; r <= '0; n <= '0; busy <= 1'b1;
        end
      end else begin
        // shift the next dividend bit into the remainder, subtract if it fits
        if (r_sh >= {1'b0, d}) begin
          r <= W'(r_sh - {1'b0, d});
          q <= {q[W-2:0], 1'b1};
        end else begin
          r <= W'(r_sh);
          q <= {q[W-2:0], 1'b0};
        end
        n <= n + 1'b1;
        if (n == ($clog2(W+1))'(W-1)) begin
          busy     <= 1'b0;
          done     <= 1'b1;
          quotient <= (r_sh >= {1'b0, d}) ? {q[W-2:0], 1'b1} : {q[W-2:0], 1'b0};
        end
      end
    end
endmodule
