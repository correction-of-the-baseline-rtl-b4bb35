// cm_correction: common-mode (baseline) correction across all pads of one
// readout unit, one time bin at a time.
//
// Every pad sees, in each time bin, an undershoot proportional to its
// normalised pulser charge k_pulser. The block estimates that undershoot from
// the pads that carry no signal and removes it from every pad:
//   s[p]      = q[p] / k_pulser[p]                  (pulser-normalised charge)
//   empty(p)  = q[p] <= Q_thr1  and  at least nPadsMin of nPadsRandom randomly
//               chosen pads r satisfy |s[p] - s[r]| < Q_thr2
//   baseline  = mean (or median) of s[p] over the empty pads
//   q_out[p]  = q[p] - baseline * k_pulser[p]
// With the second iteration enabled, the selection is run again with the
// threshold test q[p] - baseline*k_pulser[p] <= Q_thr1, and the baseline is
// recomputed from the new selection before the correction is applied.
// If no pad is found empty the baseline is zero. With cfg.enable low the
// samples pass through unchanged (baseline zero).
//
// How it works: a frame buffer holds q and s of all pads. The block runs
// through these phases, one pad per clock in each:
//   LOAD  accept cfg.n_pads samples (in_ready high only here); s is computed
//         on the way in with the stored reciprocal 1/k_pulser.
//   SEL   empty-pad selection. The nPadsRandom comparisons of one pad are made
//         in parallel; random pad r_i = (p + 1 + (lfsr_i*(n_pads-1) >> 16))
//         mod n_pads, so a pad is never compared with itself. lfsr_i are
//         N_RND_MAX 16-bit Galois LFSRs (mask 0xB400) stepped once per pad.
//   MEAN  sum/count by a restoring divider, one quotient bit per clock,
//         quotient truncated toward zero;
//   MED   or the lower median (rank (count-1)/2) by a bitwise radix search:
//         Q_W passes over the pads, each fixing one bit of the median.
//   OUT   emit the corrected pads 0..n_pads-1, one per clock.
// Cycles per time bin: n_pads (LOAD) + iterations*(n_pads + Q_W+PAD_W+1 for
// the mean, or n_pads*(1+Q_W) for the median) + n_pads (OUT).
//
// Interface: input stream valid/ready (pads of one time bin in any order,
// each exactly once); output stream valid only, pads in ascending order;
// frame_done pulses with the last output pad; baseline and n_empty give the
// estimate used for the last frame. Maps k_pulser and 1/k_pulser are written
// through map_we/map_sel/map_addr/map_data.
//
// Follows the source: the selection rules, the thresholds and counts, the
// mean/median choice, the second iteration and the scaling by k_pulser. This
// design's own choices: number formats, storing 1/k_pulser as a second map
// instead of dividing, the random-pad generator, the lower median, zero
// baseline when no pad is empty, and the sequential (one pad per clock)
// schedule.
module cm_correction
  import tpc_bc_pkg::*;
#(
  parameter int unsigned N_PADS    = 1600,
  parameter int unsigned N_RND_MAX = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  cm_cfg_t  cfg,
  // k_pulser (MAP_KP) and 1/k_pulser (MAP_INVK) map write port
  input  logic     map_we,
  input  map_sel_e map_sel,
  input  pad_t     map_addr,
  input  kp_t      map_data,
  // sample stream in
  input  logic     in_valid,
  output logic     in_ready,
  input  sample_t  in,
  // corrected stream out
  output logic     out_valid,
  output sample_t  out,
  output logic     frame_done,
  output charge_t  baseline,
  output logic [PAD_W:0] n_empty
);

  localparam int SUM_W = Q_W + PAD_W + 1;

  typedef enum logic [2:0] {S_LOAD, S_SEL, S_MEAN, S_MED, S_NEXT, S_OUT} state_e;

  // ---------------------------------------------------------------- storage
  kp_t     kp_map   [N_PADS];
  kp_t     invk_map [N_PADS];
  charge_t q_mem    [N_PADS];
  charge_t s_mem    [N_PADS];
  logic [N_PADS-1:0] cand;

  state_e  state;
  pad_t    p;                  // pad counter of the current pass
  pad_t    ld_cnt;
  tbin_t   tbin_q;
  logic    iter;               // 0: first selection, 1: second
  logic signed [SUM_W-1:0] sum;
  logic [PAD_W:0] cnt;
  charge_t base;
  logic [15:0] lfsr [N_RND_MAX];
  // divider
  logic [SUM_W-1:0] div_num, div_quo;
  logic [SUM_W-1:0] div_rem;   // remainder < divisor, fits
  logic [$clog2(SUM_W)-1:0] div_i;
  logic             div_neg;
  // median search
  logic [Q_W-1:0]   med_key;   // bits decided so far
  logic [$clog2(Q_W)-1:0]   med_b;
  logic [PAD_W:0]   med_rank, med_c0;

  // ---------------------------------------------------------------- per-pad datapath
  charge_t qp, sp;
  kp_t     kpp;
  longint  corr_p;
  logic    chk1;
  logic [N_RND_MAX-1:0] ok;
  logic [5:0] nok;
  logic    is_cand;
  logic    last_pad;
  logic [Q_W-1:0] keyp, kmask;
  logic    med_match;
  logic signed [SUM_W-1:0] s_fin;     // sum including the current pad
  logic [PAD_W:0]   cnt_fin;          // count including the current pad
  logic [SUM_W:0]   div_r2;           // next divider remainder
  logic [SUM_W-1:0] div_q2;           // next divider quotient
  logic [PAD_W:0]   med_c0n;          // next count of matching keys with bit = 0
  logic [Q_W-1:0]   med_kn;           // median key after deciding bit med_b

  always_comb begin
    qp     = q_mem[p];
    sp     = s_mem[p];
    kpp    = kp_map[p];
    corr_p = rshift_round(longint'(base) * longint'(kpp), KP_FRAC);
    chk1   = iter ? (longint'(qp) - corr_p <= longint'(cfg.thr1))
                  : (qp <= cfg.thr1);
    nok    = '0;
    for (int i = 0; i < N_RND_MAX; i++) begin
      longint off, r, d;
      off = 1 + ((longint'(lfsr[i]) * (longint'(cfg.n_pads) - 1)) >>> 16);
      r   = longint'(p) + off;
      if (r >= longint'(cfg.n_pads)) r = r - longint'(cfg.n_pads);
      d   = longint'(sp) - longint'(s_mem[PAD_W'(r)]);
      if (d < 0) d = -d;
      ok[i] = (i < int'(cfg.n_rnd)) && (d < longint'(cfg.thr2));
      nok   = nok + 6'(ok[i]);
    end
    is_cand  = chk1 && (nok >= 6'(cfg.n_min));
    last_pad = (p == cfg.n_pads - 1'b1);
    // order-preserving unsigned key of a signed value: flip the sign bit
    keyp      = {~sp[Q_W-1], sp[Q_W-2:0]};
    kmask     = ~((Q_W'(1) << (32'(med_b) + 1)) - 1'b1);
    med_match = cand[p] && (((keyp ^ med_key) & kmask) == '0) && !keyp[med_b];
    s_fin   = sum + (is_cand ? SUM_W'(sp) : '0);
    cnt_fin = cnt + (PAD_W+1)'(is_cand);
    // one restoring-division step
    div_r2 = {div_rem, div_num[div_i]};
    div_q2 = div_quo;
    if (div_r2 >= (SUM_W+1)'(cnt)) begin
      div_r2 = div_r2 - (SUM_W+1)'(cnt);
      div_q2[div_i] = 1'b1;
    end
    // one radix-select step
    med_c0n = med_c0 + (PAD_W+1)'(med_match);
    med_kn  = med_key;
    if (med_rank >= med_c0n) med_kn[med_b] = 1'b1;
  end

  // ---------------------------------------------------------------- memories
  always_ff @(posedge clk) begin
    if (map_we && 32'(map_addr) < N_PADS) begin
      if (map_sel == MAP_KP)   kp_map[map_addr]   <= map_data;
      if (map_sel == MAP_INVK) invk_map[map_addr] <= map_data;
    end
    if (state == S_LOAD && in_valid && 32'(in.pad) < N_PADS) begin
      q_mem[in.pad] <= in.q;
      s_mem[in.pad] <= sat_q(rshift_round(longint'(in.q) * longint'(invk_map[in.pad]), KP_FRAC));
    end
    if (state == S_SEL) cand[p] <= is_cand;
  end

  assign in_ready = (state == S_LOAD);
  assign baseline = base;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_LOAD;
      p          <= '0;
      ld_cnt     <= '0;
      tbin_q     <= '0;
      iter       <= 1'b0;
      sum        <= '0;
      cnt        <= '0;
      base       <= '0;
      div_num    <= '0;
      div_quo    <= '0;
      div_rem    <= '0;
      div_i      <= '0;
      div_neg    <= 1'b0;
      med_key    <= '0;
      med_b      <= '0;
      med_rank   <= '0;
      med_c0     <= '0;
      out_valid  <= 1'b0;
      out        <= '0;
      frame_done <= 1'b0;
      n_empty    <= '0;
      for (int i = 0; i < N_RND_MAX; i++) lfsr[i] <= 16'(16'hACE1 + 16'(i) * 16'h3B5D) | 16'h0001;
    end else begin
      out_valid  <= 1'b0;
      frame_done <= 1'b0;
      unique case (state)
        S_LOAD: if (in_valid) begin
          tbin_q <= in.tbin;
          if (ld_cnt == cfg.n_pads - 1'b1) begin
            ld_cnt <= '0;
            p      <= '0;
            iter   <= 1'b0;
            sum    <= '0;
            cnt    <= '0;
            base   <= '0;
            state  <= cfg.enable ? S_SEL : S_OUT;
          end else begin
            ld_cnt <= ld_cnt + 1'b1;
          end
        end

        S_SEL: begin
          for (int i = 0; i < N_RND_MAX; i++)
            lfsr[i] <= (lfsr[i] >> 1) ^ (lfsr[i][0] ? 16'hB400 : 16'h0000);
          sum <= s_fin;
          cnt <= cnt_fin;
          p <= p + 1'b1;
          if (last_pad) begin
            p <= '0;
            n_empty <= cnt_fin;
            if (cnt_fin == 0) begin
              base  <= '0;
              state <= S_NEXT;
            end else if (cfg.est == CM_MEAN) begin
              div_neg <= s_fin[SUM_W-1];
              div_num <= s_fin[SUM_W-1] ? SUM_W'(-s_fin) : SUM_W'(s_fin);
              div_quo <= '0;
              div_rem <= '0;
              div_i   <= $bits(div_i)'(SUM_W - 1);
              state   <= S_MEAN;
            end else begin
              med_key  <= '0;
              med_b    <= $bits(med_b)'(Q_W - 1);
              med_rank <= (cnt_fin - 1'b1) >> 1;
              med_c0   <= '0;
              state    <= S_MED;
            end
          end
        end

        S_MEAN: begin
          div_rem <= div_r2[SUM_W-1:0];
          div_quo <= div_q2;
          if (div_i == 0) begin
            base  <= div_neg ? sat_q(-longint'(div_q2)) : sat_q(longint'(div_q2));
            state <= S_NEXT;
          end else begin
            div_i <= div_i - 1'b1;
          end
        end

        S_MED: begin
          p      <= p + 1'b1;
          med_c0 <= med_c0n;
          if (last_pad) begin
            if (med_rank >= med_c0n) med_rank <= med_rank - med_c0n;
            med_key <= med_kn;
            med_c0  <= '0;
            p       <= '0;
            if (med_b == 0) begin
              base  <= charge_t'({~med_kn[Q_W-1], med_kn[Q_W-2:0]});
              state <= S_NEXT;
            end else begin
              med_b <= med_b - 1'b1;
            end
          end
        end

        S_NEXT: begin
          p <= '0;
          if (cfg.two_iter && !iter) begin
            iter  <= 1'b1;
            sum   <= '0;
            cnt   <= '0;
            state <= S_SEL;
          end else begin
            state <= S_OUT;
          end
        end

        S_OUT: begin
          out_valid <= 1'b1;
          out.tbin  <= tbin_q;
          out.pad   <= p;
          out.q     <= sat_q(longint'(qp) - corr_p);
          p         <= p + 1'b1;
          if (last_pad) begin
            p          <= '0;
            frame_done <= 1'b1;
            state      <= S_LOAD;
          end
        end

        default: state <= S_LOAD;
      endcase
    end
  end

  // Pads of a frame must lie inside the configured range.
  a_pad_range: assert property (@(posedge clk) disable iff (rst_n == 1'b0)
                                in_valid && in_ready |-> in.pad < cfg.n_pads);

endmodule
