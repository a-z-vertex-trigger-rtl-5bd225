`timescale 1ns/1ps
// tb_chain_ctrl: the chain controller with a model loader (done D clocks
// after ld_start) and model MLPs (outputs 5 clocks after mlp_start, values
// chosen at random by the testbench). For every track the sequence of
// requested sectors must follow the reference sector rule applied to the
// previous step's combined prediction, and the result (z, theta, z-cut bit,
// rejection and its step) must match the reference. Tracks that pass all
// steps must take 3*D + 32 clocks. Counts rejections in each step and both
// z-cut outcomes, and fails if one never occurred.
module tb_chain_ctrl;
  import nt_pkg::*;
  import nt_ref_pkg::*;
  localparam int D = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic track_valid = 0, track_ready, ld_start, ld_done = 0, mlp_start, mlp_valid = 0, res_valid;
  track2d_t track = '0;
  sec_t ld_index;
  fx_t y_topo [N_OUT];
  fx_t y_sl [N_OUT];
  nt_result_t result;

  chain_ctrl dut (.*);

  int cyc = 0, acc_cyc = 0, res_cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (track_valid && track_ready) acc_cyc <= cyc;
    if (res_valid) res_cyc <= cyc;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model loader
  int sec_log [$];
  always @(posedge clk) begin
    if (ld_start) begin
      sec_log.push_back(int'(ld_index));
      fork begin
        repeat (D - 1) @(posedge clk);
        #1 ld_done = 1;
        @(posedge clk);
        #1 ld_done = 0;
      end join_none
    end
  end

  // model MLPs: the testbench draws their outputs per step
  int yq [$][4];
  always @(posedge clk) begin
    if (mlp_start) begin
      int y [4];
      foreach (y[i]) y[i] = int'($urandom_range(0, 8000)) - 4000;
      yq.push_back(y);
      fork begin
        int yy [4];
        yy = y;
        repeat (4) @(posedge clk);
        #1;
        y_topo[0] = fx_t'(yy[0]); y_topo[1] = fx_t'(yy[1]);
        y_sl[0]   = fx_t'(yy[2]); y_sl[1]   = fx_t'(yy[3]);
        mlp_valid = 1;
        @(posedge clk);
        #1 mlp_valid = 0;
      end join_none
    end
  end

  int r_rej [3] = '{0, 0, 0};
  int r_trig = 0, r_notrig = 0;

  initial begin
    foreach (y_topo[k]) begin y_topo[k] = '0; y_sl[k] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int phi, ipt, t_acc, pz, pth, st;
      bit rej;
      phi = ($urandom_range(0, 9) == 0) ? int'($urandom_range(2880, 5759)) : int'($urandom_range(0, 2879));
      ipt = int'($urandom_range(0, 1350));
      sec_log.delete(); yq.delete();
      @(negedge clk);
      track_valid = 1; track.phi = 13'(phi); track.inv_pt = 11'(ipt);
      @(posedge clk);
      while (!track_ready) @(posedge clk);
      @(negedge clk);
      track_valid = 0;
      while (!res_valid) @(posedge clk);
      #1;
      t_acc = res_cyc - acc_cyc;
      // replay the chain with the reference rules and the drawn MLP outputs
      pz = 0; pth = 0; rej = 0; st = 0;
      for (st = 0; st < 3; st++) begin
        ref_sector_t s;
        int yt[], ys[];
        s = ref_sector(st, phi, ipt, pz, pth, 0);
        if (s.reject) begin rej = 1; break; end
        checks++;
        if (st >= sec_log.size() || sec_log[st] != s.index) begin
          failures++; $display("track %0d step %0d: sector %0d expected %0d", n, st,
                               (st < sec_log.size()) ? sec_log[st] : -1, s.index);
          break;
        end
        yt = new[2]; ys = new[2];
        yt[0] = yq[st][0]; yt[1] = yq[st][1]; ys[0] = yq[st][2]; ys[1] = yq[st][3];
        ref_combine(yt, ys, s, pz, pth);
      end
      if (st == 3) st = 2;
      checks++;
      if (result.rejected != rej || int'(result.last_step) != st || int'(result.z) != pz ||
          int'(result.theta) != pth || result.z_trig != (!rej && pz <= 96 && pz >= -96)) begin
        failures++;
        $display("track %0d: got rej %0d step %0d z %0d th %0d trig %0d, expected rej %0d step %0d z %0d th %0d",
                 n, result.rejected, result.last_step, result.z, result.theta, result.z_trig, rej, st, pz, pth);
      end
      if (rej) r_rej[st]++;
      else begin
        checks++;
        if (t_acc != 3 * D + 32) begin failures++; $display("latency %0d expected %0d", t_acc, 3 * D + 32); end
        if (result.z_trig) r_trig++; else r_notrig++;
      end
    end
    $display("rejected in steps 0/1/2: %0d %0d %0d, inside cut %0d, outside %0d", r_rej[0], r_rej[1], r_rej[2], r_trig, r_notrig);
    checks++;
    if (r_rej[0] == 0 || r_rej[1] == 0 || r_rej[2] == 0 || r_trig == 0 || r_notrig == 0) begin
      failures++; $display("a chain outcome never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
