// tb_it_filter: self-checking test of the ion-tail filter.
//
// 16 pads with random ion-tail fraction k1 (0.05..0.20) and decay k2
// (0.80..0.98) receive 300 time bins of data: baseline noise, occasional
// signal pulses and the exponential ion tail each pulse leaves behind. Every
// output is compared with a double-precision model of the filter equations
// (tolerance 4 LSB = 0.25 ADC). Also checked: zero input gives zero output,
// it_en = 0 passes samples unchanged, one-cycle latency, and that the filter
// removes most of the tail (residual well below the uncorrected tail).
module tb_it_filter;
  import tpc_bc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP = 16;
  localparam int NT = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     it_en;
  coef_t    k0;
  logic     map_we;
  map_sel_e map_sel;
  pad_t     map_addr;
  coef_t    map_data;
  logic     in_valid, out_valid;
  sample_t  in, out;

  it_filter #(.N_PADS(NP)) dut (.*);

  int checks = 0, failures = 0;
  real k1r[NP], k2r[NP], acc[NP], tail[NP];
  real exp_q[$];
  real tail_in = 0.0, tail_out = 0.0;
  bit  en_q[$];
  int  lat_ok = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // output monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    real e, g;
    e = exp_q.pop_front();
    g = real'(out.q) / 16.0;
    check(g - e < 0.25 && e - g < 0.25, $sformatf("pad %0d tbin %0d: %f expected %f", out.pad, out.tbin, g, e));
  end

  task automatic send(int p, int t, real v, bit measure_tail, real tail_part);
    longint qi;
    real e, qr;
    qi = longint'($rtoi(v * 16.0 + 100000.5)) - 100000;
    qr = real'(qi) / 16.0;
    @(negedge clk);
    in_valid = 1; in.pad = PAD_W'(p); in.tbin = TBIN_W'(t); in.q = charge_t'(qi);
    e = it_ref(qr, real'(k0) / 65536.0, k1r[p], k2r[p], acc[p]);
    if (!it_en) e = qr;
    exp_q.push_back(e);
    if (measure_tail) begin
      tail_in  += tail_part;
      tail_out += e - (qr - tail_part);
    end
  endtask

  initial begin
    it_en = 1; k0 = coef_t'(65536); map_we = 0; map_sel = MAP_IT_FRAC; map_addr = '0; map_data = '0;
    in_valid = 0; in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      int k1i, k2i;
      k1i = 3277 + $urandom_range(9830);         // 0.05 .. 0.20
      k2i = 52429 + $urandom_range(11796);       // 0.80 .. 0.98
      k1r[p] = real'(k1i) / 65536.0;
      k2r[p] = real'(k2i) / 65536.0;
      acc[p] = 0.0; tail[p] = 0.0;
      @(negedge clk); map_we = 1; map_sel = MAP_IT_FRAC;  map_addr = PAD_W'(p); map_data = coef_t'(k1i);
      @(negedge clk); map_we = 1; map_sel = MAP_IT_SLOPE; map_data = coef_t'(k2i);
    end
    @(negedge clk); map_we = 0;
    // no signal: no effect
    for (int p = 0; p < NP; p++) begin
      send(p, 0, 0.0, 0, 0.0);
      @(posedge clk);
      #1 check(out_valid && out.pad == PAD_W'(p) && out.q == 0, "one-cycle latency, zero in zero out");
    end
    // signals with exponential ion tails, generated with the tail model the
    // filter assumes: tail = k1*(1-k2)*(charge history decayed by k2 per bin)
    for (int t = 1; t < NT; t++) begin
      for (int p = 0; p < NP; p++) begin
        real sig, v, tp;
        sig = ($urandom_range(40) == 0) ? 20.0 + real'($urandom_range(400)) : 0.0;
        tp = k1r[p] * (1.0 - k2r[p]) * tail[p];    // tail in this bin
        v  = sig + tp;
        send(p, t, v, 1, tp);
        tail[p] = (tail[p] + v) * k2r[p];           // decayed charge history
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    // pass-through mode
    it_en = 0;
    for (int p = 0; p < NP; p++) send(p, NT, 50.0 + real'(p), 0, 0.0);
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0, "all outputs seen");
    $display("tail in %f, residual after filter %f", tail_in, tail_out);
    check(tail_in > 100.0, "ion tails generated");
    check(tail_out < 0.05 * tail_in && tail_out > -0.05 * tail_in, "tail removed by the filter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
