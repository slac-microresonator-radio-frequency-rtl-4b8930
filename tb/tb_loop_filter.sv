// tb_loop_filter -- open loop holds the centre; closed loop integrates
// (gain*err)>>>4 on each strobe only; leaving closed loop returns to centre.
module tb_loop_filter;
  import smurf_pkg::*;
  logic clk = 0, rst_n = 0, cl = 0, ev = 0;
  logic [31:0] center, f;
  logic signed [15:0] gain;
  logic signed [31:0] err;
  int checks = 0, failures = 0;
  longint unsigned model;

  loop_filter dut (.clk, .rst_n, .center, .closed_loop(cl), .gain, .err, .err_valid(ev), .freq_o(f));
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    center = 32'h1234_0000; gain = -16'sd300; err = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk);
    checks++; if (f != center) begin failures++; $display("open loop %h", f); end
    ev = 1; err = 32'sd5000;
    @(negedge clk) ev = 0;
    checks++; if (f != center) begin failures++; $display("open loop moved %h", f); end
    cl = 1; model = center;
    for (int i = 0; i < 300; i++) begin
      err = $urandom; err = err >>> $urandom_range(31);
      gain = 16'($urandom);
      ev = (i % 3) == 0;
      if (ev) model = (model + 64'(($signed(longint'(gain) * longint'(err))) >>> 4)) & 64'hFFFF_FFFF;
      @(negedge clk);
      checks++;
      if (f != 32'(model)) begin failures++; if (failures < 10) $display("i=%0d f=%h exp=%h", i, f, model); end
    end
    ev = 0; cl = 0;
    @(negedge clk);
    checks++; if (f != center) begin failures++; $display("no return to centre"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
