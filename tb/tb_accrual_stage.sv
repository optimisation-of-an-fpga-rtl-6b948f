// tb_accrual_stage: drives the two input streams of the accrual stage independently,
// with random gaps, and random output back-pressure; checks that each output is
// D (Qprev - Q) * dt / 2 for the matching pair of inputs, in order, with the option
// boundary of the time-point stream.
module tb_accrual_stage;
  import cds_pkg::*;
  localparam int NP = 20;
  logic clk = 0, rst_n = 0;
  logic p_valid, p_ready, d_valid, d_ready, out_valid, out_ready;
  prob_t in_p;
  term_t in_ddq, out_term;
  int checks = 0, failures = 0, nout = 0;
  real dts [NP], dd [NP];

  accrual_stage dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if ($bitstoreal(out_term.v) != dd[nout] * dts[nout] * 0.5 || out_term.last != (nout % 4 == 3)) begin
        failures++; $display("FAIL accrual %0d: %g want %g last %0d", nout, $bitstoreal(out_term.v), dd[nout] * dts[nout] * 0.5, out_term.last);
      end
      nout++;
    end
    out_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    for (int i = 0; i < NP; i++) begin dts[i] = 0.25 * (1 + i % 3); dd[i] = 0.001 * (i + 1); end
    p_valid = 0; d_valid = 0; in_p = '0; in_ddq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one driver for both streams: at each falling edge present the next item of a
    // stream with probability 1/2, then see (after the inputs settle) whether it is
    // taken at the coming rising edge
    begin
      int ip, id;
      bit fp, fd;
      ip = 0; id = 0;
      while (ip < NP || id < NP) begin
        @(negedge clk);
        if (!p_valid && ip < NP && $urandom_range(0, 1)) begin
          p_valid = 1;
          in_p = '{tp: '{t: 64'd0, dt: $realtobits(dts[ip]), recovery: 64'd0, last: (ip % 4 == 3)},
                   q: 64'd0, qprev: 64'd0};
        end
        if (!d_valid && id < NP && $urandom_range(0, 2) != 0) begin
          d_valid = 1;
          in_ddq = '{v: $realtobits(dd[id]), last: (id % 4 == 3)};
        end
        #1;
        fp = p_valid && p_ready;
        fd = d_valid && d_ready;
        @(posedge clk);
        #1;
        if (fp) begin p_valid = 0; ip++; end
        if (fd) begin d_valid = 0; id++; end
      end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (nout != NP) begin failures++; $display("FAIL %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
