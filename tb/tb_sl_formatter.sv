`timescale 1ns/1ps
// tb_sl_formatter: random relevant-TS lists (several per SL, some unused
// slots) and hits. The drift input of each SL must be the fastest corrected
// hit of that SL (maximal drift time if none); the id input must be within
// one LSB of local * 8192 / (n - 1) - 4096, the exact scaling of the TS
// position in its SL, and 0 if the SL has no hit. One-clock latency.
module tb_sl_formatter;
  import nt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dt_t event_time;
  ts_id_t rel_id [N_REL];
  logic [N_REL-1:0] hit_valid;
  dt_t hit_t [N_REL];
  fx_t x [2*N_SL];
  int checks = 0, failures = 0, multi = 0, empty_sl = 0;

  sl_formatter dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    event_time = '0; hit_valid = '0;
    foreach (hit_t[r]) begin hit_t[r] = '0; rel_id[r] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int bt [N_SL], bid [N_SL], cnt [N_SL];
      @(negedge clk);
      event_time = dt_t'($urandom_range(0, 30));
      foreach (bt[s]) begin bt[s] = 256; bid[s] = -1; cnt[s] = 0; end
      for (int r = 0; r < N_REL; r++) begin
        int s, id, t;
        s  = int'($urandom_range(0, N_SL - 1));
        id = ($urandom_range(0, 9) == 0) ? 0 : sl_base(s) + 1 + int'($urandom_range(0, SL_NTS[s] - 1));
        rel_id[r]    = ts_id_t'(id);
        hit_valid[r] = ($urandom_range(0, 1) != 0);
        hit_t[r]     = dt_t'($urandom_range(0, 255));
        t = int'(hit_t[r]) - int'(event_time);
        if (t < 0) t = 0;
        if (id != 0 && hit_valid[r]) begin
          cnt[s]++;
          if (t < bt[s]) begin bt[s] = t; bid[s] = id; end
        end
      end
      @(posedge clk); #1;
      for (int s = 0; s < N_SL; s++) begin
        int ex_t, ex_id, d;
        real ideal;
        if (cnt[s] > 1) multi++;
        if (cnt[s] == 0) empty_sl++;
        ex_t = (bid[s] < 0) ? 255 * 16 : (2 * bt[s] - 255) * 16;
        checks++;
        if (int'(x[2*s]) != ex_t) begin failures++; $display("SL %0d time: got %0d expected %0d", s, x[2*s], ex_t); end
        checks++;
        if (bid[s] < 0) begin
          if (x[2*s+1] != 0) begin failures++; $display("SL %0d id default: got %0d", s, x[2*s+1]); end
        end else begin
          ideal = real'(bid[s] - sl_base(s) - 1) * 8192.0 / real'(SL_NTS[s] - 1) - 4096.0;
          d = int'(x[2*s+1]) - int'($floor(ideal));
          if (d < -1 || d > 1) begin failures++; $display("SL %0d id: got %0d ideal %f", s, x[2*s+1], ideal); end
        end
      end
    end
    checks++;
    if (multi == 0 || empty_sl == 0) begin failures++; $display("coverage: multi %0d empty %0d", multi, empty_sl); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
