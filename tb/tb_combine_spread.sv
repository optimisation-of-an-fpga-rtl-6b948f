// tb_combine_spread: offers random per-option sums on the three inputs, each valid at
// random, and checks that a spread leaves only when all three are present, that all
// three are consumed together, and that it equals 1e4 * payoff / (payment + accrual)
// in real arithmetic (to within one rounding of each of the three operations).
module tb_combine_spread;
  import cds_pkg::*;
  logic pay_valid, pof_valid, acr_valid, out_valid, out_ready;
  logic [2:0] in_ready;
  f64_t pay_sum, pof_sum, acr_sum, out_spread;
  int checks = 0, failures = 0;

  combine_spread dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real p, o, a, w;
    for (int i = 0; i < 300; i++) begin
      p = real'($urandom_range(1, 100000)) / 10000.0;
      o = real'($urandom_range(1, 100000)) / 1000000.0;
      a = real'($urandom_range(1, 100000)) / 10000000.0;
      pay_sum = $realtobits(p); pof_sum = $realtobits(o); acr_sum = $realtobits(a);
      {pay_valid, pof_valid, acr_valid} = 3'($urandom);
      out_ready = $urandom_range(0, 1);
      #1;
      checks++;
      if (out_valid != (pay_valid && pof_valid && acr_valid) ||
          in_ready != {3{out_valid && out_ready}}) begin
        failures++; $display("FAIL handshake");
      end
      if (out_valid) begin
        w = 1.0e4 * o / (p + a);
        checks++;
        if (!cds_ref_pkg::close($bitstoreal(out_spread), w, 4e-16)) begin
          failures++; $display("FAIL spread %g want %g", $bitstoreal(out_spread), w);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
