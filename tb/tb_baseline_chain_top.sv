// tb_baseline_chain_top: end-to-end test of the whole chain at its default
// size (1600 pads, up to 16 random comparison pads).
//
// Generates time bins as a detector would deliver them: a per-pad pedestal
// with fractional part, noise, signal pulses on a random fraction of the pads,
// the ion tail each pad's past signals leave behind (with that pad's k1, k2),
// and a common-mode undershoot of -0.5 * k_pulser * (average positive signal
// of the time bin) on every pad. The digitised samples are fed with
// valid/ready and the outputs are checked against the reference models:
//   - the common-mode baseline and empty-pad count of every frame (exact);
//   - every corrected sample before zero suppression (double-precision
//     ion-tail model after the exact pedestal and common-mode models,
//     tolerance 0.25 ADC);
//   - the zero-suppressed stream equals the corrected samples above threshold.
// Frames use the mean and median estimators, one and two iterations,
// common-mode correction off, ion-tail filter off and a frame in which every
// pad carries signal. Each of these mechanisms, input back pressure, kept and
// dropped samples and a visible ion-tail correction is counted, and one that
// never happened counts as a failure.
module tb_baseline_chain_top;
  import tpc_bc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP   = 1600;
  localparam int NRND = 16;

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
  real k1r[NP], k2r[NP], acc[NP], hist[NP];
  int unsigned lfsr_m[];
  real exp_corr[$];
  real exp_cmq[$];
  sample_t exp_zs[$];
  typedef struct {
    int t; longint bexp; int nexp; bit enable, median, two_iter, it_on;
  } frame_exp_t;
  frame_exp_t exp_frames[$];
  // mechanism counters
  int n_stall = 0, n_mean = 0, n_median = 0, n_two = 0, n_cm_off = 0, n_it_off = 0;
  int n_no_empty = 0, n_kept = 0, n_dropped = 0, n_it_corr = 0, n_frames_out = 0;

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_stall++;
    if (corr_valid) begin
      real e, c, g;
      e = exp_corr.pop_front();
      c = exp_cmq.pop_front();
      g = real'(corr.q) / 16.0;
      check(g - e < 0.25 && e - g < 0.25,
            $sformatf("tbin %0d pad %0d: %f expected %f", corr.tbin, corr.pad, g, e));
      if (c - g > 1.0 || g - c > 1.0) n_it_corr++;
      if (corr.q > zs_thr) begin
        exp_zs.push_back(corr);
        n_kept++;
      end else begin
        n_dropped++;
      end
    end
    if (frame_done) begin
      frame_exp_t f;
      f = exp_frames.pop_front();
      n_frames_out++;
      if (f.enable) begin
        check(longint'(cm_baseline) == f.bexp, $sformatf("tbin %0d baseline %0d expected %0d", f.t, cm_baseline, f.bexp));
        check(int'(cm_n_empty) == f.nexp, $sformatf("tbin %0d empty pads %0d expected %0d", f.t, cm_n_empty, f.nexp));
        if (f.median) n_median++; else n_mean++;
        if (f.two_iter) n_two++;
        if (f.nexp == 0) n_no_empty++;
      end else n_cm_off++;
      if (!f.it_on) n_it_off++;
      $display("tbin %0d: est=%s iter=%0d cm=%0d it=%0d baseline=%0d empty=%0d", f.t,
               f.median ? "median" : "mean", f.two_iter ? 2 : 1, f.enable, f.it_on, cm_baseline, cm_n_empty);
    end
    if (out_valid) begin
      sample_t e;
      e = exp_zs.pop_front();
      check(out == e, $sformatf("zero-suppressed output tbin %0d pad %0d differs", out.tbin, out.pad));
    end
  end

  task automatic map_write(map_sel_e sel, int p, longint v);
    @(negedge clk);
    map_we = 1; map_sel = sel; map_addr = PAD_W'(p); map_data = coef_t'(v);
  endtask

  task automatic run_tbin(cm_set_t c, bit it_on, int t, int occ_pct, bit new_settings);
    real sig[NP], tail[NP], v[NP];
    real pos;
    longint q[], qexp[], bexp;
    int adc[NP], nexp;
    int pcnt[2];
    if (new_settings) begin
      // settings are static: let the chain drain before changing them
      @(negedge clk);
      in_valid = 0;
      while (exp_corr.size() != 0) @(negedge clk);
      repeat (4) @(negedge clk);
    end
    cm_cfg.enable = c.enable; cm_cfg.est = c.median ? CM_MEDIAN : CM_MEAN;
    cm_cfg.two_iter = c.two_iter; cm_cfg.n_pads = PAD_W'(c.n_pads);
    cm_cfg.n_rnd = 5'(c.n_rnd); cm_cfg.n_min = 5'(c.n_min);
    cm_cfg.thr1 = charge_t'(c.thr1); cm_cfg.thr2 = charge_t'(c.thr2);
    it_en = it_on;
    pos = 0.0;
    for (int p = 0; p < NP; p++) begin
      sig[p]  = ($urandom_range(99) < occ_pct) ? 3.0 + real'($urandom_range(150)) : 0.0;
      tail[p] = k1r[p] * (1.0 - k2r[p]) * hist[p];
      hist[p] = (hist[p] + sig[p] + tail[p]) * k2r[p];
      v[p]    = sig[p] + tail[p];
      pos    += v[p];
    end
    pos = pos / real'(NP);
    q = new[NP];
    for (int p = 0; p < NP; p++) begin
      real a;
      a = real'(ped[p]) / 16.0 + v[p] - 0.5 * (real'(kp[p]) / 1024.0) * pos
          + (real'($urandom_range(100)) - 50.0) / 100.0;
      adc[p] = $rtoi(a + 0.5);
      if (adc[p] < 0) adc[p] = 0;
      if (adc[p] > 1023) adc[p] = 1023;
      q[p] = ped_ref(adc[p], ped[p]);
    end
    cm_ref(c, q, kp, invk, lfsr_m, qexp, bexp, nexp, pcnt);
    for (int p = 0; p < NP; p++) begin
      real o;
      o = it_ref(real'(qexp[p]) / 16.0, real'(k0) / 65536.0, k1r[p], k2r[p], acc[p]);
      exp_corr.push_back(it_on ? o : real'(qexp[p]) / 16.0);
      exp_cmq.push_back(real'(qexp[p]) / 16.0);
    end
    // drive, pads in order, with occasional gaps
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      in_valid = ($urandom_range(15) != 0);
      if (!in_valid) begin
        p--;
        continue;
      end
      in_pad = PAD_W'(p); in_tbin = TBIN_W'(t); in_adc = ADC_W'(adc[p]);
      @(posedge clk);
      #1 while (!in_ready) begin
        @(posedge clk);
        #1;
      end
    end
    exp_frames.push_back('{t, bexp, nexp, c.enable, c.median, c.two_iter, it_on});
  endtask

  initial begin
    cm_set_t c;
    in_valid = 0; in_pad = '0; in_tbin = '0; in_adc = '0;
    map_we = 0; map_sel = MAP_PED; map_addr = '0; map_data = '0;
    cm_cfg = '0; it_en = 1;
    k0 = coef_t'(52429);          // 0.8
    zs_thr = charge_t'(19);       // 1.2 ADC
    lfsr_m = new[NRND];
    foreach (lfsr_m[i]) lfsr_m[i] = lfsr_seed(i);
    kp = new[NP]; invk = new[NP];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      int k1i, k2i;
      ped[p]  = 50 * 16 + $urandom_range(50 * 16);
      kp[p]   = 717 + $urandom_range(800);
      invk[p] = (1024 * 1024 + kp[p] / 2) / kp[p];
      k1i = 3277 + $urandom_range(9830);
      k2i = 52429 + $urandom_range(11796);
      k1r[p] = real'(k1i) / 65536.0; k2r[p] = real'(k2i) / 65536.0;
      acc[p] = 0.0; hist[p] = 0.0;
      map_write(MAP_PED, p, ped[p]);
      map_write(MAP_KP, p, kp[p]);
      map_write(MAP_INVK, p, invk[p]);
      map_write(MAP_IT_FRAC, p, k1i);
      map_write(MAP_IT_SLOPE, p, k2i);
    end
    @(negedge clk); map_we = 0;

    // two-iteration median, nPadsRandom=6, nPadsMin=4, Q_thr1=Q_thr2=2 ADC
    c = '{enable:1, median:1, two_iter:1, n_pads:NP, n_rnd:6, n_min:4, thr1:32, thr2:32};
    run_tbin(c, 1, 0, 30, 1);
    c.median = 0; c.two_iter = 0; run_tbin(c, 1, 1, 30, 1);     // mean
    c.median = 1;                 run_tbin(c, 1, 2, 20, 1);     // median
    c.median = 0; c.two_iter = 1; run_tbin(c, 1, 3, 30, 1);     // mean, 2nd iteration
    c.enable = 0;                 run_tbin(c, 1, 4, 30, 1);     // common-mode correction off
    c.enable = 1; c.median = 1;   run_tbin(c, 0, 5, 30, 1);     // ion-tail filter off
    c.two_iter = 0; c.median = 0; run_tbin(c, 1, 6, 100, 1);    // no empty pad
    c.median = 1; c.two_iter = 1;
    for (int t = 7; t < 10; t++) run_tbin(c, 1, t, 30, t == 7);  // back to back
    @(negedge clk);
    in_valid = 0;
    while (exp_frames.size() != 0) @(negedge clk);
    repeat (10) @(negedge clk);
    check(n_frames_out == 10, $sformatf("%0d frames out", n_frames_out));
    check(exp_corr.size() == 0, $sformatf("%0d corrected samples missing", exp_corr.size()));
    check(exp_zs.size() == 0, "zero-suppressed samples missing");
    check(zs_n_kept == 32'(n_kept) && zs_n_in == 32'(n_kept + n_dropped), "zero-suppression counters");
    $display("mechanisms: stall=%0d mean=%0d median=%0d two_iter=%0d cm_off=%0d it_off=%0d no_empty=%0d kept=%0d dropped=%0d it_corrections=%0d",
             n_stall, n_mean, n_median, n_two, n_cm_off, n_it_off, n_no_empty, n_kept, n_dropped, n_it_corr);
    check(n_stall > 0, "input back pressure happened");
    check(n_mean > 0, "mean estimator used");
    check(n_median > 0, "median estimator used");
    check(n_two > 0, "second iteration used");
    check(n_cm_off > 0, "common-mode correction switched off");
    check(n_it_off > 0, "ion-tail filter switched off");
    check(n_no_empty > 0, "frame without empty pads");
    check(n_kept > 0 && n_dropped > 0, "zero suppression kept and dropped samples");
    check(n_it_corr > 0, "ion-tail correction changed samples");
    $display("space saving %0d%%", 100 - (100 * zs_n_kept) / zs_n_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
