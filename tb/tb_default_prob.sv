// tb_default_prob: feeds integrated hazards for two options (four and three time points)
// and checks each token on all three fork outputs: Q = exp(-H) against real
// arithmetic, the previous Q (1 at an option's first point), and that the fork waits
// while any of the three consumers is not ready, delivering each token exactly once
// to each.
module tb_default_prob;
  import cds_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  hz_res_t in_res;
  logic [2:0] out_valid, out_ready;
  prob_t out_p;
  int checks = 0, failures = 0, nout [3] = '{0, 0, 0}, nstall = 0;
  real hs [7] = '{0.01, 0.05, 0.12, 0.3, 0.02, 0.2, 1.5};
  bit  ls [7] = '{0, 0, 0, 1, 0, 0, 1};

  default_prob dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) nstall++;
    for (int c = 0; c < 3; c++) if (out_valid[c] && out_ready[c]) begin
      int i;
      real qp;
      i = nout[c];
      qp = (i == 0 || ls[i-1]) ? 1.0 : $exp(-hs[i-1]);
      checks++;
      if (!cds_ref_pkg::close($bitstoreal(out_p.q), $exp(-hs[i]), 1e-14) ||
          !cds_ref_pkg::close($bitstoreal(out_p.qprev), qp, 1e-14) || out_p.tp.last != ls[i]) begin
        failures++; $display("FAIL consumer %0d token %0d", c, i);
      end
      nout[c]++;
    end
    out_ready <= 3'($urandom);
  end

  initial begin
    in_valid = 0; in_res = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (hs[i]) begin
      @(negedge clk);
      in_valid = 1;
      in_res = '{tp: '{t: 64'd0, dt: 64'd0, recovery: 64'd0, last: ls[i]}, h: $realtobits(hs[i])};
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    repeat (10) @(posedge clk);
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (nout[c] != 7) begin failures++; $display("FAIL consumer %0d got %0d tokens", c, nout[c]); end
    end
    checks++;
    if (nstall == 0) begin failures++; $display("FAIL fork never waited"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
