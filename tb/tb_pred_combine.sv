`timescale 1ns/1ps
// tb_pred_combine: random MLP outputs and sectors of all three steps; the
// prediction must be the average of both MLPs scaled to the sector,
// z = avg_z * z_half and theta = centre + avg_theta * half (12 fraction bits,
// rounded down), one clock after in_valid, and hold while in_valid is low.
module tb_pred_combine;
  import nt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  fx_t y_topo [N_OUT];
  fx_t y_sl [N_OUT];
  sector_t sector;
  pred_t pred;
  int checks = 0, failures = 0;

  pred_combine dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sector = '0;
    foreach (y_topo[k]) begin y_topo[k] = '0; y_sl[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int st, k, ez, eth;
      real rz, rth;
      @(negedge clk);
      st = n % 3;
      k  = int'($urandom_range(0, N_THETA[st] - 1)) - (N_THETA[st] - 1) / 2;
      sector.step = 2'(st);
      sector.th_center = thval_t'(THETA_MID + k * TH_SPACING[st]);
      sector.th_half = thval_t'(TH_HALF[st]);
      sector.z_half = zval_t'(Z_HALF[st]);
      foreach (y_topo[j]) begin
        y_topo[j] = fx_t'(int'($urandom_range(0, 8192)) - 4096);
        y_sl[j]   = fx_t'(int'($urandom_range(0, 8192)) - 4096);
      end
      in_valid = 1;
      rz  = (real'(y_topo[0]) + real'(y_sl[0])) / 2.0 / 4096.0 * real'(Z_HALF[st]);
      rth = real'(THETA_MID + k * TH_SPACING[st]) + (real'(y_topo[1]) + real'(y_sl[1])) / 2.0 / 4096.0 * real'(TH_HALF[st]);
      @(posedge clk); #1;
      checks++;
      // within 1 LSB of the exact value (two floor operations)
      if (!out_valid || real'(pred.z) > rz + 0.001 || real'(pred.z) < rz - 2.0 ||
          real'(pred.theta) > rth + 0.001 || real'(pred.theta) < rth - 2.0) begin
        failures++; $display("got z %0d th %0d, exact %f %f", pred.z, pred.theta, rz, rth);
      end
      ez = int'(pred.z); eth = int'(pred.theta);
      @(negedge clk);
      in_valid = 0;
      y_topo[0] = '0;
      @(posedge clk); #1;
      checks++;
      if (out_valid || int'(pred.z) != ez || int'(pred.theta) != eth) begin failures++; $display("not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
