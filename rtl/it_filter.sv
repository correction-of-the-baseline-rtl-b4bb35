// it_filter: per-pad exponential ion-tail filter.
//
// After each signal a GEM pad sees a slowly decaying positive tail from ions.
// Modelling the tail as an exponential, the filter keeps per pad one running
// sum Q_corr of past input charge, decayed by k2 per time bin, and removes the
// expected tail from each new sample:
//   Q_out  = Q_in - k0*k1*(1-k2) * Q_corr
//   Q_corr = (Q_corr + Q_in) * k2
// k1 (ion-tail fraction) and k2 (= exp(-slope), the decay per time bin) come
// from per-pad maps; k0 (global scale, k0 <= 1) is a register. With no
// signal the filter leaves the data unchanged. With it_en low the samples pass
// unchanged, while Q_corr keeps being updated.
//
// How it works: the maps and the Q_corr memory are read asynchronously with
// the incoming pad number; output and the new Q_corr are written on the same
// clock edge, so each sample is handled in one cycle and any order of pads is
// allowed. A per-pad "seen" bit, cleared by reset, makes the first Q_corr of
// each pad read as zero, so the state memory itself needs no reset.
//
// Interface: stream in (in_valid, in) and out (out_valid, out), no back
// pressure, latency 1 cycle, throughput 1 sample per cycle. Map write port:
// map_we, map_sel (MAP_IT_FRAC or MAP_IT_SLOPE), map_addr, map_data.
//
// Follows the source: the two filter equations, the per-pad k1 and k2 maps
// and the global k0. This design's own choices: fixed-point formats
// (coefficients 2.16, Q_corr 24.16), round-half-up right shifts, saturation,
// and evaluating k0*k1*(1-k2) per sample rather than storing it.
module it_filter
  import tpc_bc_pkg::*;
#(
  parameter int unsigned N_PADS = 1600
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     it_en,
  input  coef_t    k0,
  // k1 (MAP_IT_FRAC) and k2 (MAP_IT_SLOPE) map write port
  input  logic     map_we,
  input  map_sel_e map_sel,
  input  pad_t     map_addr,
  input  coef_t    map_data,
  // sample stream
  input  logic     in_valid,
  input  sample_t  in,
  output logic     out_valid,
  output sample_t  out
);

  localparam longint C_ONE = 64'sd1 <<< C_FRAC;

  coef_t k1_map [N_PADS];
  coef_t k2_map [N_PADS];
  logic signed [ACC_W-1:0] acc_mem [N_PADS];
  logic [N_PADS-1:0] seen;

  longint  acc, k1, k2, coef, corr, acc_new;
  charge_t q_out;

  always_comb begin
    k1      = longint'(k1_map[in.pad]);
    k2      = longint'(k2_map[in.pad]);
    acc     = seen[in.pad] ? longint'(acc_mem[in.pad]) : 0;
    // k0*k1*(1-k2), C_FRAC fractional bits
    coef    = rshift_round(rshift_round(longint'(k0) * k1, C_FRAC) * (C_ONE - k2), C_FRAC);
    corr    = rshift_round(acc * coef, C_FRAC + ACC_FRAC - Q_FRAC);
    q_out   = it_en ? sat_q(longint'(in.q) - corr) : in.q;
    acc_new = rshift_round((acc + (longint'(in.q) <<< (ACC_FRAC - Q_FRAC))) * k2, C_FRAC);
  end

  always_ff @(posedge clk) begin
    if (map_we && 32'(map_addr) < N_PADS) begin
      if (map_sel == MAP_IT_FRAC)  k1_map[map_addr] <= map_data;
      if (map_sel == MAP_IT_SLOPE) k2_map[map_addr] <= map_data;
    end
    if (in_valid) acc_mem[in.pad] <= sat_acc(acc_new);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen      <= '0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        seen[in.pad] <= 1'b1;
        out.tbin     <= in.tbin;
        out.pad      <= in.pad;
        out.q        <= q_out;
      end
    end
  end

endmodule
