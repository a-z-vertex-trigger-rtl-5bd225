`timescale 1ns/1ps
// tb_sector_select: random tracks and previous predictions for all three
// steps, compared with the reference sector rule (nearest overlapping theta
// sector, z range checks, 2D bins), plus the printed example of the paper: a
// track at theta = 80 deg selects the 63.8..94.2 deg sector in step 1 and the
// 70.5..87.5 deg sector in step 2.
module tb_sector_select;
  import nt_pkg::*;
  import nt_ref_pkg::*;
  logic [1:0] step;
  track2d_t   track;
  pred_t      prev;
  sector_t    sector;
  logic       reject;
  int checks = 0, failures = 0;

  sector_select #(.PHI0(0)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int st, input int phi, input int ipt, input int pz, input int pth);
    ref_sector_t e;
    step = 2'(st); track.phi = 13'(phi); track.inv_pt = 11'(ipt);
    prev.z = zval_t'(pz); prev.theta = thval_t'(pth);
    #1;
    e = ref_sector(st, phi, ipt, pz, pth, 0);
    checks++;
    if (reject != e.reject || (!e.reject && (int'(sector.index) != e.index ||
        int'(sector.th_center) != e.th_center || int'(sector.th_half) != e.th_half ||
        int'(sector.z_half) != e.z_half))) begin
      failures++;
      $display("step %0d phi %0d ipt %0d z %0d th %0d: got rej %0d idx %0d c %0d, expected rej %0d idx %0d c %0d",
               st, phi, ipt, pz, pth, reject, sector.index, sector.th_center, e.reject, e.index, e.th_center);
    end
  endtask

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int st;
      st = n % 3;
      check(st, int'($urandom_range(0, 3200)), int'($urandom_range(0, 1400)),
            int'($urandom_range(0, 600)) - 300, int'($urandom_range(35 * 16 - 100, 123 * 16 + 100)));
    end
    // exact sector borders
    for (int k = -7; k <= 7; k++) begin
      check(1, 100, 100, 0, THETA_MID + k * 244 + 122);
      check(1, 100, 100, 0, THETA_MID + k * 244 + 121);
      check(2, 100, 100, 0, THETA_MID + k * 136 + 68);
      check(2, 100, 100, 0, THETA_MID + k * 136 + 67);
    end
    // z range limits
    check(1, 0, 0, 240, 1264);  check(1, 0, 0, 241, 1264); check(1, 0, 0, -241, 1264);
    check(2, 0, 0, 128, 1264);  check(2, 0, 0, 129, 1264);
    // phi codes of 360 deg and more are rejected
    check(0, 5759, 0, 0, 1264); check(0, 5760, 0, 0, 1264); check(0, 8191, 0, 0, 1264);
    // paper example, theta = 80 deg
    step = 2'd1; prev.z = '0; prev.theta = thval_t'(80 * 16); #1;
    checks++;
    if (int'(sector.th_center) - int'(sector.th_half) != 1020 || int'(sector.th_center) + int'(sector.th_half) != 1508) begin
      failures++; $display("step-1 example sector %0d..%0d", sector.th_center - sector.th_half, sector.th_center + sector.th_half);
    end
    step = 2'd2; #1;
    checks++;
    if (int'(sector.th_center) - int'(sector.th_half) != 1128 || int'(sector.th_center) + int'(sector.th_half) != 1400) begin
      failures++; $display("step-2 example sector %0d..%0d", sector.th_center - sector.th_half, sector.th_center + sector.th_half);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
