`timescale 1ns/1ps
// tb_track_fifo: random pushes and pops against a queue model, with phases
// that fill the FIFO (in_ready must drop at DEPTH entries) and drain it.
module tb_track_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [23:0] in_data = '0, out_data;
  int checks = 0, failures = 0, fulls = 0;
  logic [23:0] q [$];

  track_fifo #(.T(logic [23:0]), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      int phase;
      phase = (c / 200) % 3;           // 0: balanced, 1: fill, 2: drain
      @(negedge clk);
      in_valid  = (phase == 2) ? ($urandom_range(0, 9) == 0) : ($urandom_range(0, 9) < (phase == 1 ? 9 : 5));
      out_ready = (phase == 1) ? ($urandom_range(0, 9) == 0) : ($urandom_range(0, 9) < 5);
      in_data   = 24'($urandom);
      #1;
      checks++;
      if (in_ready != (q.size() < DEPTH) || out_valid != (q.size() != 0)) begin
        failures++;
        $display("flags: ready=%0d valid=%0d size=%0d", in_ready, out_valid, q.size());
      end
      if (q.size() == DEPTH) fulls++;
      if (out_valid) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("data %h expected %h", out_data, q[0]); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
