// sector_select: picks the sector, i.e. the MLP pair, of one prediction step.
//
// The prediction chain narrows a track's phase-space sector step by step.
// Step 0 (the paper's first step) uses only the 2D trigger: a 1 deg bin in phi
// and a 0.1 GeV^-1 bin in 1/pT, theta 35..123 deg, z -50..50 cm. Steps 1 and 2
// keep that 2D sector and add a theta sector chosen from the previous step's
// theta prediction, with the z range narrowed to +-15 cm and +-8 cm. Their
// theta sectors overlap: two binnings displaced by half a bin, which is the
// same as sector centres spaced by half a sector width. A prediction therefore
// picks the sector whose centre is nearest (ties go to the higher sector), and
// prediction beyond the outermost centres is clamped to the outermost sector.
// A track is rejected when the previous step's z lies outside the new z range,
// or in step 0 when the 2D track lies outside this board's phi range or below
// the lowest pT. A phi code of 360 deg or more (5760..8191) is not a valid
// angle and is rejected too.
//
// Numbers from the paper: the z ranges, the theta range of step 0, the sector
// widths 30.5 and 17.0 deg, the 7 and 13 sectors and the centre sector at
// 79 deg (the middle of 63.8..94.2 and of 70.5..87.5 deg). The 2D bin sizes
// are the sector sizes of the paper's studies. The numbering of sectors (step
// offset + 2D sector * theta sectors + theta sector), the board's phi origin
// and the lowest pT (0.5 GeV) are this design's choice.
//
// Purely combinational.
module sector_select
  import nt_pkg::*;
#(
  parameter int PHI0 = 0           // start of the board's phi range, 1/16 deg
) (
  input  logic [1:0] step,
  input  track2d_t   track,
  input  pred_t      prev,         // prediction of the previous step (steps 1, 2)
  output sector_t    sector,
  output logic       reject
);

  always_comb begin
    int phi_rel, phi_bin, ipt_bin, s2d, st, nth, kk, kmax, d;
    logic rej;
    d = 0;

    st      = int'(step);
    phi_rel = int'(track.phi) - PHI0;
    if (phi_rel < 0) phi_rel += 360 * 16;
    phi_bin = phi_rel / 16;
    ipt_bin = int'(track.inv_pt) / 64;
    rej     = (phi_bin >= N_PHI_BINS) || (ipt_bin >= N_INVPT_BINS) || (st >= N_STEPS) ||
              (int'(track.phi) >= 360 * 16);
    s2d     = phi_bin * N_INVPT_BINS + ipt_bin;

    if (st >= N_STEPS) st = N_STEPS - 1;
    nth  = N_THETA[st];
    kmax = (nth - 1) / 2;
    kk   = 0;
    if (st > 0) begin
      d  = int'(prev.theta) - THETA_MID;
      kk = -kmax;
      for (int m = -6; m < 6; m++)
        if (m >= -kmax && m < kmax && d >= m * TH_SPACING[st] + TH_SPACING[st] / 2) kk = m + 1;
      if (int'(prev.z) > Z_HALF[st] || int'(prev.z) < -Z_HALF[st]) rej = 1'b1;
    end

    sector.index     = sec_t'(SEC_OFF[st] + s2d * nth + kk + kmax);
    sector.step      = 2'(st);
    sector.th_center = thval_t'(THETA_MID + kk * TH_SPACING[st]);
    sector.th_half   = thval_t'(TH_HALF[st]);
    sector.z_half    = zval_t'(Z_HALF[st]);
    reject           = rej;
  end

endmodule
