// tpc_bc_pkg: shared types, fixed-point formats and arithmetic helpers of the
// TPC baseline-correction chain (pedestal subtraction, common-mode correction,
// ion-tail filter, zero suppression).
//
// Number formats (all choices of this design; the source only gives the
// algorithms in floating point):
//   ADC sample       unsigned ADC_W bits (integer ADC counts)
//   charge_t         signed Q_W bits, Q_FRAC fractional bits (ADC counts)
//   pedestal         unsigned PED_W bits, Q_FRAC fractional bits
//   k_pulser, 1/k    unsigned KP_W bits, KP_FRAC fractional bits
//   ion-tail coefs   unsigned C_W bits, C_FRAC fractional bits (k0, k1, k2)
//   ion-tail state   signed ACC_W bits, ACC_FRAC fractional bits
// Right shifts round half up; results that do not fit saturate.
package tpc_bc_pkg;

  localparam int ADC_W    = 10;
  localparam int Q_W      = 16;
  localparam int Q_FRAC   = 4;
  localparam int PED_W    = ADC_W + Q_FRAC;
  localparam int KP_W     = 12;
  localparam int KP_FRAC  = 10;
  localparam int C_W      = 18;
  localparam int C_FRAC   = 16;
  localparam int ACC_W    = 40;
  localparam int ACC_FRAC = 16;
  localparam int PAD_W    = 11;   // pad index within one readout unit (up to 2048 pads)
  localparam int TBIN_W   = 16;   // time-bin stamp carried with every sample

  typedef logic signed [Q_W-1:0] charge_t;
  typedef logic [PAD_W-1:0]      pad_t;
  typedef logic [TBIN_W-1:0]     tbin_t;
  typedef logic [KP_W-1:0]       kp_t;
  typedef logic [C_W-1:0]        coef_t;

  // One pad sample travelling down the chain.
  typedef struct packed {
    tbin_t   tbin;
    pad_t    pad;
    charge_t q;
  } sample_t;

  // Baseline estimator of the common-mode correction.
  typedef enum logic {CM_MEAN = 1'b0, CM_MEDIAN = 1'b1} cm_est_e;

  // Run-time settings of the common-mode correction (names follow the
  // constants of the reference algorithm: nPadsCRU, nPadsRandom, nPadsMin,
  // Q_thr1, Q_thr2).
  typedef struct packed {
    logic        enable;     // 0: baseline forced to zero (correction off)
    cm_est_e     est;        // mean or median baseline
    logic        two_iter;   // second empty-pad selection pass
    logic [PAD_W-1:0] n_pads;   // nPadsCRU, 1..N_PADS
    logic [4:0]  n_rnd;      // nPadsRandom, 0..N_RND_MAX
    logic [4:0]  n_min;      // nPadsMin
    charge_t     thr1;       // Q_thr1
    charge_t     thr2;       // Q_thr2
  } cm_cfg_t;

  // Pad maps that can be loaded through the chain's map write port.
  typedef enum logic [2:0] {
    MAP_PED      = 3'd0,   // pedestal
    MAP_KP       = 3'd1,   // normalised pulser charge k_pulser
    MAP_INVK     = 3'd2,   // 1 / k_pulser
    MAP_IT_FRAC  = 3'd3,   // ion-tail fraction k1
    MAP_IT_SLOPE = 3'd4    // ion-tail decay per time bin k2 = exp(-slope)
  } map_sel_e;

  localparam longint Q_MAX = (64'sd1 <<< (Q_W-1)) - 1;
  localparam longint Q_MIN = -(64'sd1 <<< (Q_W-1));
  localparam longint ACC_MAX = (64'sd1 <<< (ACC_W-1)) - 1;
  localparam longint ACC_MIN = -(64'sd1 <<< (ACC_W-1));

  // Arithmetic right shift by sh (sh >= 1) with rounding half up.
  function automatic longint rshift_round(longint v, int sh);
    return (v + (64'sd1 <<< (sh-1))) >>> sh;
  endfunction

  function automatic charge_t sat_q(longint v);
    if (v > Q_MAX) return charge_t'(Q_MAX);
    if (v < Q_MIN) return charge_t'(Q_MIN);
    return charge_t'(v);
  endfunction

  function automatic logic signed [ACC_W-1:0] sat_acc(longint v);
    if (v > ACC_MAX) return ACC_W'(ACC_MAX);
    if (v < ACC_MIN) return ACC_W'(ACC_MIN);
    return ACC_W'(v);
  endfunction

endpackage
