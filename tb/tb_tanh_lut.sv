`timescale 1ns/1ps
// tb_tanh_lut: sweeps the input over [-5, 5] (and the 28-bit extremes) and
// compares with 4096 * tanh(x): the error must stay within 17 LSB (half a
// table step of 1/128 at slope 1, plus rounding), the output must be
// monotonic and saturate near +-1, and y must follow x by one clock.
module tb_tanh_lut;
  import nt_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic signed [27:0] x = '0;
  fx_t y;
  int checks = 0, failures = 0;

  tanh_lut #(.IN_W(28)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev;
    prev = -5000;
    for (int v = -5 * 4096; v <= 5 * 4096; v += 7) begin
      real e;
      int err;
      @(negedge clk);
      x = 28'(v);
      @(posedge clk); #1;
      e = $tanh(real'(v) / 4096.0) * 4096.0;
      err = int'(y) - int'(e);
      checks++;
      if (err > 17 || err < -17) begin failures++; $display("x=%0d y=%0d tanh=%f", v, y, e); end
      checks++;
      if (int'(y) < prev) begin failures++; $display("not monotonic at %0d", v); end
      prev = int'(y);
    end
    @(negedge clk); x = 28'sh7FFFFFF; @(posedge clk); #1;
    checks++; if (int'(y) < 4090) begin failures++; $display("max input: %0d", y); end
    @(negedge clk); x = -28'sh8000000; @(posedge clk); #1;
    checks++; if (int'(y) > -4090) begin failures++; $display("min input: %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
