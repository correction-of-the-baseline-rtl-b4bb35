// tb_toy_mc_workload: the chain at its default size run on a toy detector
// workload, measuring what the corrections are for.
//
// 1000 of the 1600 pads are used, as in a toy Monte Carlo of one readout
// unit. Each pad gets a pedestal with fractional part, Gaussian-like noise of
// about 1 ADC, a normalised pulser charge 0.7..1.5, an ion-tail fraction
// 0.05..0.20 and decay 0.80..0.98. Clusters spread over 3 pads x 3 time bins
// with an exponentially distributed maximum. The common-mode undershoot of
// every pad is -0.5 * k_pulser * (mean positive signal of the time bin), and
// every pad's signal carries the exponential ion tail of its past charge.
//
// Three studies run one after the other:
//   A  common mode only, at 10 %, 20 % and 30 % occupancy, for no correction,
//      mean, median, mean with second iteration and median with second
//      iteration;
//   B  ion tail only, filter off, on with each pad's own parameters
//      (pad-by-pad) and on with the median parameters loaded for every pad
//      (fixed-to-median), k0 = 0.85;
//   C  no noise; signal only, signal with ion tail, and both effects with
//      both corrections (two-pass median, 6 random pads, at least 4 within
//      2 ADC, Q_thr1 = 2 ADC, k0 = 0.80), recording the space saving of a
//      1.2 ADC threshold cut.
// Every corrected sample is checked against the reference models (exact
// common-mode model, double-precision ion-tail model, 0.25 ADC tolerance).
// On top of that, the average baseline shift (corrected charge of samples
// without true signal) must shrink with the common-mode correction and with
// the ion-tail filter (both ways of loading its maps), the second-iteration
// median must do better than the plain mean, the second iteration must
// select fewer pads than the first and both must select fewer pads at higher
// occupancy, and correcting both effects must raise the space saving above
// the uncorrected one.
module tb_toy_mc_workload;
  import tpc_bc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP_BUF = 1600;   // chain default
  localparam int NP     = 1000;   // pads used
  localparam int NRND   = 16;
  localparam int NTB    = 12;     // time bins per setting

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cm_cfg_t  cm_cfg;
  logic     it_en;
  coef_t    k0;
  charge_t  zs_thr;
  logic     map_we;
  map_sel_e map_sel;
  pad_t     map_addr;
  coef_t    map_data;
  logic     in_valid, in_ready;
  pad_t     in_pad;
  tbin_t    in_tbin;
  logic [ADC_W-1:0] in_adc;
  logic     corr_valid, out_valid, frame_done;
  sample_t  corr, out;
  charge_t  cm_baseline;
  logic [PAD_W:0] cm_n_empty;
  logic [31:0] zs_n_in, zs_n_kept;

  baseline_chain_top dut (.*);

  int checks = 0, failures = 0;
  int ped[NP];
  longint kp[], invk[];
  real k1r[NP], k2r[NP], acc[NP], hist[NP];   // true tail of each pad
  int  k1i[NP], k2i[NP];
  real fk1r[NP], fk2r[NP];        // parameters loaded into the filter maps
  real pend1[NP], pend2[NP];      // cluster charge still to arrive in t+1, t+2
  int unsigned lfsr_m[];
  real exp_corr[$];
  bit  empty_q[$];                // sample has no true signal
  // measurement accumulators
  real shift_sum;
  int  shift_n;
  int  used_sum, used_n;          // pads used for the baseline, per frame
  real used_frac;                 // their fraction in the last setting
  int  tb_count = 0;
  bit  sim_noise = 1;

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) if (rst_n && corr_valid) begin
    real e, g;
    bit  emp;
    e = exp_corr.pop_front();
    emp = empty_q.pop_front();
    g = real'(corr.q) / 16.0;
    check(g - e < 0.25 && e - g < 0.25,
          $sformatf("tbin %0d pad %0d: %f expected %f", corr.tbin, corr.pad, g, e));
    if (emp) begin
      shift_sum += g;
      shift_n++;
    end
  end

  function automatic real fabs(real x);
    return x < 0.0 ? -x : x;
  endfunction

  function automatic real noise();
    return (real'($urandom_range(1000)) + real'($urandom_range(1000)) + real'($urandom_range(1000))
            - 1500.0) / 500.0;
  endfunction

  task automatic map_write(map_sel_e sel, int p, longint v);
    @(negedge clk);
    map_we = 1; map_sel = sel; map_addr = PAD_W'(p); map_data = coef_t'(v);
  endtask

  // one time bin: generate, model, drive
  task automatic run_tbin(cm_set_t c, bit it_on, bit sim_cm, bit sim_it, int occ_pct);
    real sig[NP], v[NP];
    real pos;
    longint q[], qexp[], bexp;
    int adc[NP], nexp;
    int pcnt[2];
    int ncl;
    // new clusters: each covers 3 pads x 3 time bins
    for (int p = 0; p < NP; p++) begin
      sig[p] = pend1[p]; pend1[p] = pend2[p]; pend2[p] = 0.0;
    end
    ncl = (occ_pct * NP) / 900;
    for (int k = 0; k < ncl; k++) begin
      int p0;
      real qmax;
      p0 = $urandom_range(NP - 3);
      qmax = 5.0 - 40.0 * $ln(real'($urandom_range(1, 100000)) / 100000.0);
      if (qmax > 900.0) qmax = 900.0;
      for (int dp = 0; dp < 3; dp++) begin
        real w;
        w = (dp == 1) ? 1.0 : 0.45;
        sig[p0 + dp]   += 0.45 * w * qmax;
        pend1[p0 + dp] += w * qmax;
        pend2[p0 + dp] += 0.45 * w * qmax;
      end
    end
    pos = 0.0;
    for (int p = 0; p < NP; p++) begin
      real tail;
      tail = sim_it ? k1r[p] * (1.0 - k2r[p]) * hist[p] : 0.0;
      if (sim_it) hist[p] = (hist[p] + sig[p] + tail) * k2r[p];
      v[p] = sig[p] + tail;
      pos += v[p];
    end
    pos = pos / real'(NP);
    q = new[NP];
    for (int p = 0; p < NP; p++) begin
      real a;
      a = real'(ped[p]) / 16.0 + v[p] + (sim_noise ? noise() : 0.0)
          - (sim_cm ? 0.5 * (real'(kp[p]) / 1024.0) * pos : 0.0);
      adc[p] = $rtoi(a + 0.5);
      if (adc[p] < 0) adc[p] = 0;
      if (adc[p] > 1023) adc[p] = 1023;
      q[p] = ped_ref(adc[p], ped[p]);
    end
    cm_ref(c, q, kp, invk, lfsr_m, qexp, bexp, nexp, pcnt);
    for (int p = 0; p < NP; p++) begin
      real o;
      o = it_ref(real'(qexp[p]) / 16.0, real'(k0) / 65536.0, fk1r[p], fk2r[p], acc[p]);
      exp_corr.push_back(it_on ? o : real'(qexp[p]) / 16.0);
      empty_q.push_back(sig[p] == 0.0);
    end
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      in_valid = 1;
      in_pad = PAD_W'(p); in_tbin = TBIN_W'(tb_count); in_adc = ADC_W'(adc[p]);
      @(posedge clk);
      #1 while (!in_ready) begin
        @(posedge clk);
        #1;
      end
    end
    @(negedge clk);
    in_valid = 0;
    @(posedge frame_done);
    #1;
    if (c.enable)
      check(longint'(cm_baseline) == bexp && int'(cm_n_empty) == nexp,
            $sformatf("tbin %0d baseline %0d/%0d empty %0d/%0d", tb_count, cm_baseline, bexp, cm_n_empty, nexp));
    used_sum += int'(cm_n_empty); used_n++;
    tb_count++;
  endtask

  // run NTB time bins with fixed settings and return the mean baseline shift
  task automatic run_setting(cm_set_t c, bit it_on, bit sim_cm, bit sim_it, int occ_pct,
                             output real shift, output real saving);
    int in0, kept0;
    @(negedge clk);
    while (exp_corr.size() != 0) @(negedge clk);
    repeat (4) @(negedge clk);
    cm_cfg.enable = c.enable; cm_cfg.est = c.median ? CM_MEDIAN : CM_MEAN;
    cm_cfg.two_iter = c.two_iter; cm_cfg.n_pads = PAD_W'(c.n_pads);
    cm_cfg.n_rnd = 5'(c.n_rnd); cm_cfg.n_min = 5'(c.n_min);
    cm_cfg.thr1 = charge_t'(c.thr1); cm_cfg.thr2 = charge_t'(c.thr2);
    it_en = it_on;
    // two settling time bins, not measured
    run_tbin(c, it_on, sim_cm, sim_it, occ_pct);
    run_tbin(c, it_on, sim_cm, sim_it, occ_pct);
    @(negedge clk);
    while (exp_corr.size() != 0) @(negedge clk);
    repeat (4) @(negedge clk);
    shift_sum = 0.0; shift_n = 0;
    used_sum = 0; used_n = 0;
    in0 = int'(zs_n_in); kept0 = int'(zs_n_kept);
    for (int t = 0; t < NTB; t++) run_tbin(c, it_on, sim_cm, sim_it, occ_pct);
    @(negedge clk);
    while (exp_corr.size() != 0) @(negedge clk);
    repeat (4) @(negedge clk);
    shift  = shift_sum / real'(shift_n);
    used_frac = 100.0 * real'(used_sum) / real'(used_n * NP);
    saving = 100.0 - 100.0 * real'(int'(zs_n_kept) - kept0) / real'(int'(zs_n_in) - in0);
  endtask

  function automatic int median_of(int a[NP]);
    // lower median by counting ranks
    for (int i = 0; i < NP; i++) begin
      int below, same;
      below = 0; same = 0;
      for (int j = 0; j < NP; j++) begin
        if (a[j] < a[i]) below++;
        else if (a[j] == a[i]) same++;
      end
      if (below <= (NP - 1) / 2 && (NP - 1) / 2 < below + same) return a[i];
    end
    return a[0];
  endfunction

  // load the ion-tail maps with the given parameters for every pad
  task automatic load_it_maps(bit fixed);
    int m1, m2;
    m1 = median_of(k1i); m2 = median_of(k2i);
    for (int p = 0; p < NP; p++) begin
      fk1r[p] = real'(fixed ? m1 : k1i[p]) / 65536.0;
      fk2r[p] = real'(fixed ? m2 : k2i[p]) / 65536.0;
      map_write(MAP_IT_FRAC, p, fixed ? m1 : k1i[p]);
      map_write(MAP_IT_SLOPE, p, fixed ? m2 : k2i[p]);
    end
    @(negedge clk); map_we = 0;
  endtask

  initial begin
    cm_set_t c, off;
    real used_mean[3], used_mean2[3];
    real sh_none, sh_mean, sh_med, sh_mean2, sh_med2, sh_it_off, sh_it_on, sh_it_fix, sv, sv_raw, sv_cor, dummy;
    in_valid = 0; in_pad = '0; in_tbin = '0; in_adc = '0;
    map_we = 0; map_sel = MAP_PED; map_addr = '0; map_data = '0;
    cm_cfg = '0; it_en = 0;
    k0 = coef_t'(55706);          // 0.85
    zs_thr = charge_t'(19);       // 1.2 ADC
    lfsr_m = new[NRND];
    foreach (lfsr_m[i]) lfsr_m[i] = lfsr_seed(i);
    kp = new[NP]; invk = new[NP];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      ped[p]  = 60 * 16 + $urandom_range(40 * 16);
      kp[p]   = 717 + $urandom_range(800);
      invk[p] = (1024 * 1024 + kp[p] / 2) / kp[p];
      k1i[p] = 3277 + $urandom_range(9830);
      k2i[p] = 52429 + $urandom_range(11796);
      k1r[p] = real'(k1i[p]) / 65536.0; k2r[p] = real'(k2i[p]) / 65536.0;
      acc[p] = 0.0; hist[p] = 0.0; pend1[p] = 0.0; pend2[p] = 0.0;
      map_write(MAP_PED, p, ped[p]);
      map_write(MAP_KP, p, kp[p]);
      map_write(MAP_INVK, p, invk[p]);
    end
    @(negedge clk); map_we = 0;
    load_it_maps(0);

    c   = '{enable:1, median:0, two_iter:0, n_pads:NP, n_rnd:6, n_min:4, thr1:32, thr2:32};
    off = c; off.enable = 0;

    // A: common mode only
    for (int oi = 1; oi <= 3; oi++) begin
      int occ;
      occ = 10 * oi;
      run_setting(off, 0, 1, 0, occ, sh_none, sv);
      c.median = 0; c.two_iter = 0; run_setting(c, 0, 1, 0, occ, sh_mean, sv);
      used_mean[oi - 1] = used_frac;
      c.median = 1; c.two_iter = 0; run_setting(c, 0, 1, 0, occ, sh_med, sv);
      c.median = 0; c.two_iter = 1; run_setting(c, 0, 1, 0, occ, sh_mean2, sv);
      used_mean2[oi - 1] = used_frac;
      c.median = 1; c.two_iter = 1; run_setting(c, 0, 1, 0, occ, sh_med2, sv);
      $display("common mode, occupancy %0d%%: baseline shift none %6.3f  mean %6.3f  median %6.3f  mean-2nd %6.3f  median-2nd %6.3f ADC",
               occ, sh_none, sh_mean, sh_med, sh_mean2, sh_med2);
      check(sh_none < -0.5, "common mode shifts the baseline down");
      check(fabs(sh_mean) < 0.5 * fabs(sh_none) && fabs(sh_med2) < 0.5 * fabs(sh_none),
            "common-mode correction restores most of the shift");
      check(fabs(sh_med2) <= fabs(sh_mean), "second-iteration median at least as good as mean");
      $display("common mode, occupancy %0d%%: pads used for the baseline mean %5.1f%%  mean-2nd %5.1f%%",
               occ, used_mean[oi - 1], used_mean2[oi - 1]);
      check(used_mean2[oi - 1] <= used_mean[oi - 1], "second iteration uses fewer pads");
      if (oi > 1)
        check(used_mean[oi - 1] < used_mean[oi - 2] && used_mean2[oi - 1] < used_mean2[oi - 2],
              "fewer pads used at higher occupancy");
    end

    // B: ion tail only (history builds up over the settling bins)
    run_setting(off, 0, 0, 1, 30, sh_it_off, sv);
    run_setting(off, 1, 0, 1, 30, sh_it_on, sv);
    load_it_maps(1);
    run_setting(off, 1, 0, 1, 30, sh_it_fix, sv);
    load_it_maps(0);
    $display("ion tail, occupancy 30%%: baseline shift filter off %6.3f  pad-by-pad %6.3f  fixed-to-median %6.3f ADC",
             sh_it_off, sh_it_on, sh_it_fix);
    check(sh_it_off > 0.1, "ion tail shifts the baseline up");
    check(fabs(sh_it_on) < 0.5 * sh_it_off, "ion-tail filter restores most of the shift");
    check(fabs(sh_it_fix) < 0.5 * sh_it_off, "fixed-to-median filter restores most of the shift");

    // C: space saving of a 1.2 ADC cut without noise: signal only, signal
    // with ion tail, and both effects with both corrections
    sim_noise = 0;
    run_setting(off, 0, 0, 0, 30, dummy, sv);
    run_setting(off, 0, 0, 1, 30, dummy, sv_raw);
    c.median = 1; c.two_iter = 1;
    k0 = coef_t'(52429);          // 0.80, with the two-pass median 6/4/2/2 ADC
    run_setting(c, 1, 1, 1, 30, dummy, sv_cor);
    $display("no noise, occupancy 30%%: space saving signal %5.1f%%  signal+ion tail %5.1f%%  both effects corrected %5.1f%%",
             sv, sv_raw, sv_cor);
    check(sv_raw < sv, "ion tail lowers the space saving");
    check(sv_cor > sv_raw, "corrections restore the space saving");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
