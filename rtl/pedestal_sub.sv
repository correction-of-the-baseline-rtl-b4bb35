// pedestal_sub: subtracts the pedestal of each pad from its ADC samples.
//
// The pedestal of every pad is held in a static map (one entry per pad, with
// Q_FRAC fractional bits, so that the fractional part of the pedestal is
// removed as well). The map is written through map_we/map_addr/map_data, one
// entry per cycle, before data taking. Each accepted ADC sample leaves one
// clock later as a signed charge q = adc - pedestal[pad].
//
// Interface: valid/ready stream in (in_valid, in_ready, in_pad, in_tbin,
// in_adc) and out (out_valid, out_ready, out). A sample is transferred when
// valid and ready are both high; out holds its value while out_ready is low.
// Latency 1 cycle, throughput 1 sample per cycle.
//
// The step itself is named in the source as the first stage of the readout
// unit's processing; the map organisation, number format and handshake are
// this design's choices.
module pedestal_sub
  import tpc_bc_pkg::*;
#(
  parameter int unsigned N_PADS = 1600
) (
  input  logic       clk,
  input  logic       rst_n,
  // pedestal map write port
  input  logic       map_we,
  input  pad_t       map_addr,
  input  logic [PED_W-1:0] map_data,
  // ADC sample stream in
  input  logic       in_valid,
  output logic       in_ready,
  input  pad_t       in_pad,
  input  tbin_t      in_tbin,
  input  logic [ADC_W-1:0] in_adc,
  // charge stream out
  output logic       out_valid,
  input  logic       out_ready,
  output sample_t    out
);

  logic [PED_W-1:0] ped_map [N_PADS];

  always_ff @(posedge clk) begin
    if (map_we && 32'(map_addr) < N_PADS) ped_map[map_addr] <= map_data;
  end

  logic [PED_W-1:0] ped;
  sample_t          nxt;

  always_comb begin
    ped = (32'(in_pad) < N_PADS) ? ped_map[in_pad] : '0;
    nxt.tbin = in_tbin;
    nxt.pad  = in_pad;
    nxt.q    = sat_q(longint'({in_adc, Q_FRAC'(0)}) - longint'(ped));
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out <= nxt;
    end
  end

  // A stalled output must not change.
  a_hold: assert property (@(posedge clk) disable iff (rst_n == 1'b0)
                           out_valid && !out_ready |=> out_valid && $stable(out));

endmodule
