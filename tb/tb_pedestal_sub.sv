// tb_pedestal_sub: self-checking test of the pedestal subtraction.
//
// Loads random pedestals (with fractional part) into a 32-pad map, sends
// random ADC samples with random gaps while the consumer stalls at random,
// and compares each output with adc - pedestal computed by the reference
// model. Checks the one-cycle latency of an unstalled sample and that a
// stalled output holds.
module tb_pedestal_sub;
  import tpc_bc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic map_we;
  pad_t map_addr;
  logic [PED_W-1:0] map_data;
  logic in_valid, in_ready, out_valid, out_ready;
  pad_t in_pad;
  tbin_t in_tbin;
  logic [ADC_W-1:0] in_adc;
  sample_t out;

  pedestal_sub #(.N_PADS(NP)) dut (.*);

  int checks = 0, failures = 0;
  int ped [NP];
  sample_t expq[$];
  int stalls = 0;

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

  // consumer: random ready, compare on every transfer
  always @(negedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      sample_t e;
      e = expq.pop_front();
      check(out == e, $sformatf("pad %0d: q=%0d expected %0d", out.pad, out.q, e.q));
    end
    if (out_valid && !out_ready) stalls++;
  end
  always @(posedge clk) if (rst_n && !drain) begin
    #1 out_ready = ($urandom_range(3) != 0);
  end
  bit drain = 1;

  initial begin
    map_we = 0; map_addr = '0; map_data = '0;
    in_valid = 0; in_pad = '0; in_tbin = '0; in_adc = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      ped[p] = (p == 3) ? 1023 * 16 : $urandom_range(100 * 16);
      map_we = 1; map_addr = PAD_W'(p); map_data = PED_W'(ped[p]);
    end
    @(negedge clk);
    map_we = 0;
    // latency: one sample with the output ready
    out_ready = 1;
    in_valid = 1; in_pad = 5; in_tbin = 7; in_adc = 200;
    expq.push_back('{tbin: 7, pad: 5, q: charge_t'(ped_ref(200, ped[5]))});
    @(posedge clk);
    #1 check(out_valid == 1'b1, "one-cycle latency");
    drain = 0;
    for (int n = 0; n < 2000; n++) begin
      int p, a;
      @(negedge clk);
      if ($urandom_range(4) == 0) begin
        in_valid = 0;
        continue;
      end
      p = $urandom_range(NP - 1);
      a = (n % 97 == 0) ? 0 : $urandom_range(1023);
      in_valid = 1; in_pad = PAD_W'(p); in_tbin = TBIN_W'(n); in_adc = ADC_W'(a);
      while (!in_ready) @(negedge clk);
      expq.push_back('{tbin: TBIN_W'(n), pad: PAD_W'(p), q: charge_t'(ped_ref(a, ped[p]))});
    end
    @(negedge clk);
    in_valid = 0;
    drain = 1;
    #2 out_ready = 1;
    repeat (20) @(negedge clk);
    check(expq.size() == 0, $sformatf("%0d samples never came out", expq.size()));
    check(stalls > 0, "back pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
