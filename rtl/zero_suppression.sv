// zero_suppression: threshold cut that keeps only samples carrying signal.
//
// A sample is kept (out_valid high one cycle later) when its corrected charge
// is strictly above thr; all others are dropped. Two counters, cleared by
// reset, count the samples seen (n_in) and kept (n_kept), so that the data
// reduction ("space saving" = 1 - n_kept/n_in) can be read out.
//
// Interface: stream in (in_valid, in) and out (out_valid, out), no back
// pressure, latency 1 cycle.
//
// The source names zero suppression as the last step of the chain and
// evaluates it as a plain threshold cut (1.2 ADC in its data-volume study);
// the strict comparison, the counters and their widths are this design's own.
// Refinements of a production zero suppression (keeping neighbouring samples,
// output formatting) are not described there and are not included.
module zero_suppression
  import tpc_bc_pkg::*;
#(
  parameter int unsigned CNT_W = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  charge_t  thr,
  input  logic     in_valid,
  input  sample_t  in,
  output logic     out_valid,
  output sample_t  out,
  output logic [CNT_W-1:0] n_in,
  output logic [CNT_W-1:0] n_kept
);

  logic keep;
  assign keep = in_valid && (in.q > thr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      n_in      <= '0;
      n_kept    <= '0;
    end else begin
      out_valid <= keep;
      if (keep) out <= in;
      if (in_valid) n_in <= n_in + 1'b1;
      if (keep) n_kept <= n_kept + 1'b1;
    end
  end

endmodule
