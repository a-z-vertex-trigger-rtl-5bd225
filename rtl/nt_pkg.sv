// nt_pkg: types and constants shared by the neural z-vertex trigger.
//
// Detector numbers that follow the paper: 9 superlayers (SL), 2336 track
// segments (TS) in total with ids 1..160 in SL 1, drift times of 8 bits with a
// 2 ns LSB (a 512 ns window), MLPs with inputs and outputs scaled to [-1,1],
// a 3-step prediction chain whose z ranges are +-50, +-15 and +-8 cm, whose
// theta range is 35..123 deg in step 1 and whose overlapping theta sectors are
// 30.5 deg (7 sectors) and 17.0 deg (13 sectors) wide in steps 2 and 3.
//
// This design's own choices: the TS count of each SL (160, 160, 192, ... 384,
// which sums to the paper's 2336), the fixed-point format (signed 16 bit with
// 12 fraction bits, so 1.0 = 4096), the units of z and theta (1/16 cm and
// 1/16 deg), the 2D track format, the 512-bit parameter memory word and the
// layout of a sector's parameter record.
package nt_pkg;

  // ---------------------------------------------------------------- detector
  localparam int N_SL     = 9;
  localparam int N_TS     = 2336;
  localparam int TS_ID_W  = 12;     // ids 1..2336, 0 = no TS
  localparam int DT_W     = 8;      // drift time, 2 ns per LSB
  localparam int DT_MAX   = 255;    // maximal drift time, used for "no hit"

  typedef logic [TS_ID_W-1:0] ts_id_t;
  typedef logic [DT_W-1:0]    dt_t;

  // One TS hit as delivered by a track segment finder: TS id and the drift
  // time of its priority wire.
  typedef struct packed {
    ts_id_t id;
    dt_t    t;
  } ts_hit_t;

  // Number of TS per SL (innermost first).
  localparam int SL_NTS [N_SL] = '{160, 160, 192, 224, 256, 288, 320, 352, 384};

  // Id of the last TS below superlayer sl (ids of SL sl are sl_base+1 ..
  // sl_base+SL_NTS[sl]).
  function automatic int sl_base(input int sl);
    int s = 0;
    for (int i = 0; i < N_SL; i++)
      if (i < sl) s += SL_NTS[i];
    return s;
  endfunction

  // Superlayer (0..8) of a TS id (1..2336).
  function automatic int sl_of(input ts_id_t id);
    int s = 0;
    for (int i = 1; i < N_SL; i++)
      if (int'(id) > sl_base(i)) s = i;
    return s;
  endfunction

  // --------------------------------------------------------------- fixed point
  localparam int FX_W    = 16;
  localparam int FX_FRAC = 12;
  localparam int FX_ONE  = 1 << FX_FRAC;
  typedef logic signed [FX_W-1:0] fx_t;

  // ---------------------------------------------------------------- 2D track
  // phi in 1/16 deg (0..5759), inverse transverse momentum in units of
  // 0.1/64 GeV^-1 (so one 0.1 GeV^-1 sector is 64 LSB).
  typedef struct packed {
    logic [12:0] phi;
    logic [10:0] inv_pt;
  } track2d_t;

  // ---------------------------------------------------------- prediction chain
  localparam int N_STEPS   = 3;
  localparam int THETA_MID = 79 * 16;        // centre of 35..123 deg
  // Per step: half width of the z range (1/16 cm), half width of a theta
  // sector (1/16 deg), spacing of the overlapping theta sector centres and the
  // number of theta sectors.
  localparam int Z_HALF     [N_STEPS] = '{50 * 16, 15 * 16, 8 * 16};
  localparam int TH_HALF    [N_STEPS] = '{44 * 16, 244, 136};   // 44, 15.25, 8.5 deg
  localparam int TH_SPACING [N_STEPS] = '{0, 244, 136};         // half a sector width
  localparam int N_THETA    [N_STEPS] = '{1, 7, 13};
  localparam int Z_CUT      = 6 * 16;                           // 6 cm

  typedef logic signed [15:0] zval_t;       // z in 1/16 cm
  typedef logic signed [15:0] thval_t;      // theta in 1/16 deg

  typedef struct packed {
    zval_t  z;
    thval_t theta;
  } pred_t;

  // Result sent towards the global decision logic, one per track.
  typedef struct packed {
    logic       rejected;      // track dropped by a z range check or the 2D sector
    logic [1:0] last_step;     // step that produced z (or rejected the track), 0..2
    logic       z_trig;        // |z| <= Z_CUT after the last step
    zval_t      z;
    thval_t     theta;
  } nt_result_t;

  // --------------------------------------------------------------- MLPs
  localparam int N_REL   = 20;               // relevant TS per sector
  localparam int N_HID   = 60;
  localparam int N_OUT   = 2;                // output 0: z, output 1: theta
  localparam int N_IN_TOPO = N_REL;
  localparam int N_IN_SL   = 2 * N_SL;

  function automatic int mlp_nw(input int nin, input int nhid, input int nout);
    return (nin + 1) * nhid + (nhid + 1) * nout;
  endfunction

  // --------------------------------------------------------- parameter memory
  localparam int MEM_W   = 512;              // one memory word ("beat")
  localparam int WPB     = MEM_W / FX_W;     // 32 weights per beat
  localparam int MADDR_W = 27;               // 8 GB / 64 B

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  // Sector record: 1 beat of relevant TS ids (16-bit slots), then the weights
  // of the topological MLP, then those of the TS-id MLP, each starting on a
  // beat boundary.
  localparam int REL_BEATS  = ceil_div(N_REL, WPB);
  localparam int TOPO_BEATS = ceil_div(mlp_nw(N_IN_TOPO, N_HID, N_OUT), WPB);
  localparam int SLM_BEATS  = ceil_div(mlp_nw(N_IN_SL, N_HID, N_OUT), WPB);
  localparam int REC_BEATS  = REL_BEATS + TOPO_BEATS + SLM_BEATS;

  // 2D sectors: 1 deg in phi over the 180 deg of one board, 0.1 GeV^-1 in 1/pT
  // from 0 to 2 GeV^-1 (pT >= 0.5 GeV).
  localparam int N_PHI_BINS   = 180;
  localparam int N_INVPT_BINS = 20;
  localparam int N_SEC2D      = N_PHI_BINS * N_INVPT_BINS;
  localparam int SEC_W        = 17;
  localparam int SEC_OFF [N_STEPS] = '{0, N_SEC2D, N_SEC2D * (1 + 7)};
  localparam int N_SECTORS    = N_SEC2D * (1 + 7 + 13);

  typedef logic [SEC_W-1:0] sec_t;

  // Scaling and range of one selected sector.
  typedef struct packed {
    sec_t   index;
    logic [1:0] step;
    thval_t th_center;
    thval_t th_half;
    zval_t  z_half;
  } sector_t;

endpackage
