`timescale 1ns/1ps
// tb_mlp: the paper's 20-60-1 network and a 18-60-2 one (the TS-id MLP of the
// chain). Random weights are loaded through the 512-bit beat port, random
// inputs in [-1,1] are applied, and the outputs are compared exactly with the
// reference MLP (same equations, weight order and fixed-point rules). Checks
// the 5-clock latency, back-to-back starts, and that reloading the weights
// changes the function.
module tb_mlp;
  import nt_pkg::*;
  import nt_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // network A: 20-60-1, network B: 18-60-2
  logic             wr_a = 0, wr_b = 0, start = 0;
  logic [15:0]      wr_beat = '0;
  logic [MEM_W-1:0] wr_data = '0;
  fx_t xa [20];
  fx_t xb [18];
  fx_t ya [1];
  fx_t yb [2];
  logic va, vb;

  mlp #(.NIN(20), .NHID(60), .NOUT(1)) dut_a (.clk, .rst_n, .wr_en(wr_a), .wr_beat, .wr_data,
                                              .start, .x(xa), .out_valid(va), .y(ya));
  mlp #(.NIN(18), .NHID(60), .NOUT(2)) dut_b (.clk, .rst_n, .wr_en(wr_b), .wr_beat, .wr_data,
                                              .start, .x(xb), .out_valid(vb), .y(yb));

  int wa[], wb[];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input bit which, input int w[]);
    int nb;
    nb = (w.size() + WPB - 1) / WPB;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      wr_a = !which; wr_b = which;
      wr_beat = 16'(b);
      for (int k = 0; k < WPB; k++)
        wr_data[k*16 +: 16] = 16'((b * WPB + k < w.size()) ? w[b * WPB + k] : 0);
    end
    @(negedge clk);
    wr_a = 0; wr_b = 0;
  endtask

  task automatic rand_weights(ref int w[], input int n, input int spread);
    w = new[n];
    foreach (w[i]) w[i] = int'($urandom_range(0, 2 * spread)) - spread;
  endtask

  // Runs NRUN back-to-back computations and checks every result and its timing.
  task automatic run_batch(input int nrun);
    int xin_a [$][], xin_b [$][];
    int t0, got;
    got = 0;
    fork
      begin
        for (int n = 0; n < nrun; n++) begin
          int a[], b[];
          a = new[20]; b = new[18];
          @(negedge clk);
          foreach (a[i]) begin a[i] = int'($urandom_range(0, 8192)) - 4096; xa[i] = fx_t'(a[i]); end
          foreach (b[i]) begin b[i] = int'($urandom_range(0, 8192)) - 4096; xb[i] = fx_t'(b[i]); end
          xin_a.push_back(a); xin_b.push_back(b);
          start = 1;
          if (n == 0) t0 = $time;
        end
        @(negedge clk);
        start = 0;
      end
      begin
        while (got < nrun) begin
          @(posedge clk); #1;
          if (va) begin
            int ea[], eb[];
            if (got == 0) begin
              checks++;
              if (($time - t0 + 4) / 10 != 5) begin failures++; $display("latency %0d", ($time - t0 + 4) / 10); end
            end
            ref_mlp(20, 60, 1, wa, xin_a[got], ea);
            ref_mlp(18, 60, 2, wb, xin_b[got], eb);
            checks++;
            if (int'(ya[0]) != ea[0]) begin failures++; $display("A run %0d: got %0d expected %0d", got, ya[0], ea[0]); end
            checks++;
            if (!vb || int'(yb[0]) != eb[0] || int'(yb[1]) != eb[1]) begin
              failures++; $display("B run %0d: got %0d %0d expected %0d %0d", got, yb[0], yb[1], eb[0], eb[1]);
            end
            got++;
          end
        end
      end
    join
  endtask

  initial begin
    foreach (xa[i]) xa[i] = '0;
    foreach (xb[i]) xb[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rand_weights(wa, mlp_nw(20, 60, 1), 900);
    rand_weights(wb, mlp_nw(18, 60, 2), 900);
    load(0, wa); load(1, wb);
    run_batch(1);
    run_batch(30);
    rand_weights(wa, mlp_nw(20, 60, 1), 3000);     // larger weights: saturating neurons
    rand_weights(wb, mlp_nw(18, 60, 2), 3000);
    load(0, wa); load(1, wb);
    run_batch(30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
