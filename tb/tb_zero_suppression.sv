// tb_zero_suppression: self-checking test of the threshold cut.
//
// Sends 3000 samples with charges spread around a threshold of 1.2 ADC
// (19/16), including values exactly at the threshold, and checks that
// exactly the samples strictly above it come out one cycle later, in order
// and unchanged, and that the seen/kept counters match.
module tb_zero_suppression;
  import tpc_bc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  charge_t thr;
  logic    in_valid, out_valid;
  sample_t in, out;
  logic [31:0] n_in, n_kept;

  zero_suppression #(.CNT_W(32)) dut (.*);

  int checks = 0, failures = 0;
  sample_t expq[$];
  int sent = 0, kept = 0;

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

  always @(negedge clk) if (rst_n && out_valid) begin
    sample_t e;
    e = expq.pop_front();
    check(out == e, $sformatf("kept sample pad %0d q %0d, expected pad %0d q %0d", out.pad, out.q, e.pad, e.q));
  end

  initial begin
    thr = charge_t'(19);
    in_valid = 0; in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      sample_t s;
      @(negedge clk);
      s.tbin = TBIN_W'(n / 64);
      s.pad  = PAD_W'(n % 64);
      case ($urandom_range(3))
        0: s.q = charge_t'(19);                                   // at threshold
        1: s.q = charge_t'(20);                                   // just above
        default: s.q = charge_t'(int'($urandom_range(800)) - 400);
      endcase
      in_valid = ($urandom_range(5) != 0);
      in = s;
      if (in_valid) begin
        sent++;
        if (s.q > 19) begin
          kept++;
          expq.push_back(s);
        end
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);
    check(expq.size() == 0, "every kept sample came out");
    check(n_in == 32'(sent), $sformatf("n_in %0d expected %0d", n_in, sent));
    check(n_kept == 32'(kept), $sformatf("n_kept %0d expected %0d", n_kept, kept));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
