// tb_payoff_stage: loads a 24-point interest curve, streams 14 tokens through the
// payoff stage (three interpolation units) with independent random back-pressure on
// its two outputs, and checks in order both the payoff term D (Qprev - Q)(1 - R) and
// the discounted default probability D (Qprev - Q) sent to the accrual stage, against
// real arithmetic (relative tolerance 1e-12); both outputs must carry every token once.
module tb_payoff_stage;
  import cds_pkg::*;
  import cds_ref_pkg::*;
  localparam int DEPTH = 32;
  localparam int LEN = 24;
  localparam int NP = 14;
  logic clk = 0, rst_n = 0;
  logic [5:0] len;
  logic we;
  logic [4:0] waddr;
  rate_pt_t wdata;
  logic in_valid, in_ready, out_valid, out_ready, acc_valid, acc_ready;
  prob_t in_p;
  term_t out_term, acc_term;
  int checks = 0, failures = 0, n1 = 0, n2 = 0;
  real ts [NP], qs [NP], qps [NP], rs [NP];

  payoff_stage #(.NREP(3), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic real ddq(int i);
    return $exp(-rate(ts[i]) * ts[i]) * (qps[i] - qs[i]);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (!close($bitstoreal(out_term.v), ddq(n1) * (1.0 - rs[n1]), 1e-12)) begin
        failures++; $display("FAIL payoff %0d", n1);
      end
      n1++;
    end
    if (acc_valid && acc_ready) begin
      checks++;
      if (!close($bitstoreal(acc_term.v), ddq(n2), 1e-12) || acc_term.last != (n2 == NP - 1)) begin
        failures++; $display("FAIL ddq %0d", n2);
      end
      n2++;
    end
    out_ready <= ($urandom_range(0, 2) != 0);
    acc_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    make_curves(LEN, 4.0);
    for (int i = 0; i < NP; i++) begin
      ts[i] = 0.3 * (i + 1); qs[i] = $exp(-0.03 * ts[i]); qps[i] = $exp(-0.03 * (ts[i] - 0.3));
      rs[i] = 0.2 + 0.03 * i;
    end
    len = LEN; we = 0; waddr = 0; wdata = '0; in_valid = 0; in_p = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < LEN; j++) begin
      @(negedge clk);
      we = 1; waddr = 5'(j); wdata = '{t: $realtobits(ir_t[j]), v: $realtobits(ir_v[j])};
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < NP; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_p = '{tp: '{t: $realtobits(ts[i]), dt: $realtobits(0.3), recovery: $realtobits(rs[i]),
                     last: (i == NP - 1)}, q: $realtobits(qs[i]), qprev: $realtobits(qps[i])};
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    while (n1 < NP || n2 < NP) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (n1 != NP || n2 != NP) begin failures++; $display("FAIL counts %0d %0d", n1, n2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
