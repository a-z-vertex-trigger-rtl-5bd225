`timescale 1ns/1ps
// tb_topo_formatter: random hit patterns and event times against the scaling
// rule x = (2 t - 255) * 16 with t = max(drift - event time, 0), and t = 255
// for a TS without hit. Also checks the one-clock latency.
module tb_topo_formatter;
  import nt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dt_t event_time;
  logic [N_REL-1:0] hit_valid;
  dt_t hit_t [N_REL];
  fx_t x [N_REL];
  int checks = 0, failures = 0;

  topo_formatter dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    event_time = '0; hit_valid = '0;
    foreach (hit_t[r]) hit_t[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int exp_x [N_REL];
      @(negedge clk);
      event_time = dt_t'($urandom_range(0, 60));
      for (int r = 0; r < N_REL; r++) begin
        int t;
        hit_valid[r] = ($urandom_range(0, 2) != 0);
        hit_t[r] = dt_t'($urandom_range(0, 255));
        t = int'(hit_t[r]) - int'(event_time);
        if (t < 0) t = 0;
        exp_x[r] = hit_valid[r] ? (2 * t - 255) * 16 : 255 * 16;
      end
      @(posedge clk); #1;
      for (int r = 0; r < N_REL; r++) begin
        checks++;
        if (int'(x[r]) != exp_x[r]) begin
          failures++;
          $display("slot %0d: got %0d expected %0d", r, x[r], exp_x[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
