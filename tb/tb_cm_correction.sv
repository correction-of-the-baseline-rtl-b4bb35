// tb_cm_correction: self-checking test of the common-mode correction.
//
// Builds time bins of 64 pads with a common-mode undershoot scaled by each
// pad's pulser charge, noise and signal pads, and runs them through the block
// with the mean and median estimators, one and two selection passes, the
// correction disabled, a frame with no empty pad and random settings. Every
// output pad, the baseline and the number of empty pads are compared with the
// integer reference model of tb_ref_pkg; the busy time of every frame is
// compared with the cycle count stated in the module header.
module tb_cm_correction;
  import tpc_bc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP   = 64;
  localparam int NRND = 16;
  localparam int SUM_W = Q_W + PAD_W + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cm_cfg_t  cfg;
  logic     map_we;
  map_sel_e map_sel;
  pad_t     map_addr;
  kp_t      map_data;
  logic     in_valid, in_ready;
  sample_t  in;
  logic     out_valid, frame_done;
  sample_t  out;
  charge_t  baseline;
  logic [PAD_W:0] n_empty;

  cm_correction #(.N_PADS(NP), .N_RND_MAX(NRND)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned lfsr_m [];
  longint kp[], invk[];
  int busy;

  always @(negedge clk) if (rst_n && !in_ready) busy++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_frame(cm_set_t c, int occ_pct, int tb_no, real cm_adc);
    longint q[], qexp[], bexp;
    int nexp, exp_busy, est, iters;
    int pcnt[2];
    sample_t got[$];
    q = new[c.n_pads];
    for (int p = 0; p < c.n_pads; p++) begin
      real v;
      v = -cm_adc * real'(kp[p]) / 1024.0 + (real'($urandom_range(200)) - 100.0) / 100.0;
      if ($urandom_range(99) < occ_pct) v += 5.0 + real'($urandom_range(200));
      q[p] = longint'($rtoi(v * 16.0 + 100000.5)) - 100000;
    end
    cfg.enable   = c.enable;
    cfg.est      = c.median ? CM_MEDIAN : CM_MEAN;
    cfg.two_iter = c.two_iter;
    cfg.n_pads   = PAD_W'(c.n_pads);
    cfg.n_rnd    = 5'(c.n_rnd);
    cfg.n_min    = 5'(c.n_min);
    cfg.thr1     = charge_t'(c.thr1);
    cfg.thr2     = charge_t'(c.thr2);
    cm_ref(c, q, kp, invk, lfsr_m, qexp, bexp, nexp, pcnt);
    busy = 0;
    // drive pads in a shuffled order with random gaps
    begin
      int order[];
      order = new[c.n_pads];
      foreach (order[i]) order[i] = i;
      order.shuffle();
      foreach (order[i]) begin
        @(negedge clk);
        in_valid = 1'b1;
        in.pad   = PAD_W'(order[i]);
        in.tbin  = TBIN_W'(tb_no);
        in.q     = charge_t'(q[order[i]]);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        if ($urandom_range(3) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
    end
    do begin
      @(negedge clk);
      if (out_valid) got.push_back(out);
    end while (!frame_done);
    check(got.size() == c.n_pads, $sformatf("frame %0d: %0d outputs", tb_no, got.size()));
    foreach (got[i]) begin
      if (i < c.n_pads)
        check(got[i].pad == PAD_W'(i) && got[i].tbin == TBIN_W'(tb_no) &&
              longint'(got[i].q) == qexp[i],
              $sformatf("frame %0d pad %0d: q=%0d expected %0d", tb_no, i, got[i].q, qexp[i]));
    end
    if (c.enable) begin
      check(longint'(baseline) == bexp, $sformatf("frame %0d baseline %0d expected %0d", tb_no, baseline, bexp));
      check(int'(n_empty) == nexp, $sformatf("frame %0d n_empty %0d expected %0d", tb_no, n_empty, nexp));
    end
    // busy cycles: per pass n_pads + estimator + 1, then n_pads for output
    iters = c.enable ? (c.two_iter ? 2 : 1) : 0;
    exp_busy = c.n_pads;
    for (int it = 0; it < iters; it++) exp_busy += c.n_pads + 1;
    for (int it = 0; it < iters; it++)
      exp_busy += (pcnt[it] == 0) ? 0 : (c.median ? Q_W * c.n_pads : SUM_W);
    check(busy == exp_busy, $sformatf("frame %0d busy %0d cycles, expected %0d", tb_no, busy, exp_busy));
    $display("frame %0d: med=%0d two=%0d n=%0d rnd=%0d min=%0d baseline=%0d n_empty=%0d busy=%0d",
             tb_no, c.median, c.two_iter, c.n_pads, c.n_rnd, c.n_min, baseline, n_empty, busy);
  endtask

  initial begin
    cm_set_t c;
    in_valid = 0; in = '0; map_we = 0; map_sel = MAP_KP; map_addr = '0; map_data = '0;
    cfg = '0;
    lfsr_m = new[NRND];
    foreach (lfsr_m[i]) lfsr_m[i] = lfsr_seed(i);
    kp = new[NP]; invk = new[NP];
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load the pulser maps
    for (int p = 0; p < NP; p++) begin
      kp[p]   = 717 + $urandom_range(800);                 // 0.7 .. 1.48
      invk[p] = (1024 * 1024 + kp[p] / 2) / kp[p];
      map_we <= 1; map_sel <= MAP_KP;   map_addr <= PAD_W'(p); map_data <= kp_t'(kp[p]);   @(posedge clk);
      map_sel <= MAP_INVK; map_data <= kp_t'(invk[p]); @(posedge clk);
    end
    map_we <= 0;
    @(posedge clk);

    c = '{enable:1, median:0, two_iter:0, n_pads:NP, n_rnd:6, n_min:4, thr1:32, thr2:32};
    run_frame(c, 30, 1, 4.0);                      // mean
    c.median = 1;   run_frame(c, 30, 2, 4.0);      // median
    c.median = 0; c.two_iter = 1; run_frame(c, 30, 3, 5.0);   // mean, 2nd iteration
    c.median = 1;   run_frame(c, 30, 4, 5.0);      // median, 2nd iteration
    c.enable = 0;   run_frame(c, 30, 5, 5.0);      // correction off
    c.enable = 1; c.median = 0; c.two_iter = 0;
    run_frame(c, 100, 6, 0.0);                     // every pad carries signal
    c.n_pads = 40;  run_frame(c, 20, 7, 3.0);      // fewer pads than the buffer
    for (int f = 8; f < 28; f++) begin
      c.median   = $urandom_range(1);
      c.two_iter = $urandom_range(1);
      c.n_pads   = 16 + $urandom_range(NP - 16);
      c.n_rnd    = $urandom_range(NRND);
      c.n_min    = $urandom_range(c.n_rnd);
      c.thr1     = 16 + $urandom_range(48);
      c.thr2     = 16 + $urandom_range(48);
      run_frame(c, $urandom_range(40), f, real'($urandom_range(8)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
