// tb_ref_pkg: reference models used by the testbenches of the baseline
// correction chain. They are written from the algorithm descriptions (the
// comments at the head of each RTL module) with plain integer and real
// arithmetic, independently of the RTL code:
//   ped_ref   pedestal subtraction
//   cm_ref    common-mode correction of one time bin (exact integer model,
//             including the random-pad generator, so results match bit for bit)
//   it_ref    ion-tail filter in double precision (compared with a tolerance)
package tb_ref_pkg;
  import tpc_bc_pkg::*;

  function automatic longint rnd_half_up(longint v, int sh);
    longint d;
    d = longint'(1) << sh;
    // floor((v + d/2) / d) for either sign
    v = v + d / 2;
    if (v >= 0) return v / d;
    return -((-v + d - 1) / d);
  endfunction

  function automatic longint clamp_q(longint v);
    longint hi, lo;
    hi = (longint'(1) << (Q_W - 1)) - 1;
    lo = -(longint'(1) << (Q_W - 1));
    return v > hi ? hi : (v < lo ? lo : v);
  endfunction

  function automatic longint ped_ref(int adc, int ped);
    return clamp_q(longint'(adc) * 16 - longint'(ped));
  endfunction

  // 16-bit Galois LFSR, feedback mask 0xB400
  function automatic int unsigned lfsr_next(int unsigned x);
    return (x >> 1) ^ ((x & 1) ? 32'hB400 : 32'h0);
  endfunction

  function automatic int unsigned lfsr_seed(int i);
    return ((32'hACE1 + i * 32'h3B5D) & 32'hFFFF) | 1;
  endfunction

  typedef struct {
    bit      enable;
    bit      median;
    bit      two_iter;
    int      n_pads;
    int      n_rnd;
    int      n_min;
    longint  thr1;
    longint  thr2;
  } cm_set_t;

  // Common-mode correction of one frame. q, kp, invk hold the n_pads values;
  // lfsr holds the generator state and is advanced as the hardware does.
  function automatic void cm_ref(input cm_set_t c, input longint q[], input longint kp[],
                                 input longint invk[], ref int unsigned lfsr[],
                                 output longint qout[], output longint base,
                                 output int n_empty, output int pass_cnt[2]);
    longint s[];
    longint sel[$];
    int iters;
    s = new[c.n_pads];
    qout = new[c.n_pads];
    for (int p = 0; p < c.n_pads; p++) s[p] = clamp_q(rnd_half_up(q[p] * invk[p], KP_FRAC));
    base = 0;
    n_empty = 0;
    pass_cnt = '{0, 0};
    iters = c.enable ? (c.two_iter ? 2 : 1) : 0;
    for (int it = 0; it < iters; it++) begin
      sel.delete();
      for (int p = 0; p < c.n_pads; p++) begin
        bit t1;
        int nok;
        if (it == 0) t1 = (q[p] <= c.thr1);
        else         t1 = (q[p] - rnd_half_up(base * kp[p], KP_FRAC) <= c.thr1);
        nok = 0;
        for (int i = 0; i < c.n_rnd; i++) begin
          longint off, r, d;
          off = 1 + ((longint'(lfsr[i]) * (c.n_pads - 1)) / 65536);
          r = (p + off) % c.n_pads;
          d = s[p] - s[r];
          if (d < 0) d = -d;
          if (d < c.thr2) nok++;
        end
        for (int i = 0; i < lfsr.size(); i++) lfsr[i] = lfsr_next(lfsr[i]);
        if (t1 && nok >= c.n_min) sel.push_back(s[p]);
      end
      n_empty = sel.size();
      pass_cnt[it] = n_empty;
      if (sel.size() == 0) base = 0;
      else if (!c.median) begin
        longint sum;
        sum = 0;
        foreach (sel[k]) sum += sel[k];
        base = clamp_q(sum / sel.size());    // SV division truncates toward zero
      end else begin
        // insertion sort with explicit signed comparison
        for (int a = 1; a < sel.size(); a++) begin
          longint key;
          int b;
          key = sel[a];
          b = a - 1;
          while (b >= 0 && sel[b] > key) begin
            sel[b + 1] = sel[b];
            b--;
          end
          sel[b + 1] = key;
        end
        base = sel[(sel.size() - 1) / 2];
      end
    end
    for (int p = 0; p < c.n_pads; p++)
      qout[p] = clamp_q(q[p] - rnd_half_up(base * kp[p], KP_FRAC));
  endfunction

  // Ion-tail filter on one sample, real-valued; acc is the pad's Q_corr in ADC.
  function automatic real it_ref(input real q, input real k0, input real k1,
                                 input real k2, inout real acc);
    real o;
    o   = q - k0 * k1 * (1.0 - k2) * acc;
    acc = (acc + q) * k2;
    return o;
  endfunction

endpackage
