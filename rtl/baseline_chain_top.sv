// baseline_chain_top: the baseline-correction chain of one TPC readout unit.
//
// Digitised pad samples (one per pad and 200 ns time bin) pass through
//   pedestal_sub      ADC - pedestal[pad]
//   cm_correction     common-mode baseline estimated from the empty pads of
//                     the time bin and removed, scaled by each pad's k_pulser
//   it_filter         per-pad exponential ion-tail filter
//   zero_suppression  threshold cut
// in this order. The common-mode correction needs all pads of a time bin
// before it can emit any, so it back-pressures the input (in_ready) while it
// processes a frame; the later stages take one sample per clock.
//
// Interface: sample input valid/ready (in_pad, in_tbin, in_adc; the pads of a
// time bin in any order, each exactly once, then the next time bin); one map
// write port shared by all pad maps (map_sel picks the map; pedestal, k_pulser,
// 1/k_pulser, ion-tail fraction, ion-tail decay); static settings cm_cfg, k0,
// it_en, zs_thr; output of the kept samples (out_valid, out) and of the
// samples before the threshold cut (corr_valid, corr); diagnostic outputs for
// the common-mode baseline of the last frame and the zero-suppression
// counters. The FEE link decoding that would feed in_* is not part of it.
//
// Follows the source: the order of the four steps and the algorithms of the
// two corrections. This design's own: the handshake, the map port, the number
// formats and the sequential schedule (see the individual modules).
module baseline_chain_top
  import tpc_bc_pkg::*;
#(
  parameter int unsigned N_PADS    = 1600,
  parameter int unsigned N_RND_MAX = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  // settings
  input  cm_cfg_t  cm_cfg,
  input  logic     it_en,
  input  coef_t    k0,
  input  charge_t  zs_thr,
  // pad map write port
  input  logic     map_we,
  input  map_sel_e map_sel,
  input  pad_t     map_addr,
  input  coef_t    map_data,
  // digitised samples in
  input  logic     in_valid,
  output logic     in_ready,
  input  pad_t     in_pad,
  input  tbin_t    in_tbin,
  input  logic [ADC_W-1:0] in_adc,
  // corrected samples before zero suppression
  output logic     corr_valid,
  output sample_t  corr,
  // zero-suppressed output
  output logic     out_valid,
  output sample_t  out,
  // diagnostics
  output logic     frame_done,
  output charge_t  cm_baseline,
  output logic [PAD_W:0] cm_n_empty,
  output logic [31:0] zs_n_in,
  output logic [31:0] zs_n_kept
);

  logic    ped_valid, ped_ready;
  sample_t ped_out;
  logic    cm_valid;
  sample_t cm_out;

  pedestal_sub #(.N_PADS(N_PADS)) u_ped (
    .clk, .rst_n,
    .map_we   (map_we && map_sel == MAP_PED),
    .map_addr,
    .map_data (map_data[PED_W-1:0]),
    .in_valid, .in_ready, .in_pad, .in_tbin, .in_adc,
    .out_valid(ped_valid),
    .out_ready(ped_ready),
    .out      (ped_out)
  );

  cm_correction #(.N_PADS(N_PADS), .N_RND_MAX(N_RND_MAX)) u_cm (
    .clk, .rst_n,
    .cfg      (cm_cfg),
    .map_we   (map_we && (map_sel == MAP_KP || map_sel == MAP_INVK)),
    .map_sel,
    .map_addr,
    .map_data (map_data[KP_W-1:0]),
    .in_valid (ped_valid),
    .in_ready (ped_ready),
    .in       (ped_out),
    .out_valid(cm_valid),
    .out      (cm_out),
    .frame_done,
    .baseline (cm_baseline),
    .n_empty  (cm_n_empty)
  );

  it_filter #(.N_PADS(N_PADS)) u_it (
    .clk, .rst_n,
    .it_en,
    .k0,
    .map_we   (map_we && (map_sel == MAP_IT_FRAC || map_sel == MAP_IT_SLOPE)),
    .map_sel,
    .map_addr,
    .map_data,
    .in_valid (cm_valid),
    .in       (cm_out),
    .out_valid(corr_valid),
    .out      (corr)
  );

  zero_suppression #(.CNT_W(32)) u_zs (
    .clk, .rst_n,
    .thr      (zs_thr),
    .in_valid (corr_valid),
    .in       (corr),
    .out_valid,
    .out,
    .n_in     (zs_n_in),
    .n_kept   (zs_n_kept)
  );

endmodule
