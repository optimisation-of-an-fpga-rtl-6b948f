// tb_payment_stage: loads a 24-point interest curve into the stage's RAM copies,
// streams 14 time-point tokens through it (two interpolation units, random output
// back-pressure) and checks every payment term D(t) Q(t) dt, with D(t) =
// exp(-r(t) t) from the reference interpolation, in order (relative tolerance 1e-12).
module tb_payment_stage;
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
  logic in_valid, in_ready, out_valid, out_ready;
  prob_t in_p;
  term_t out_term;
  int checks = 0, failures = 0, nout = 0;
  real ts [NP], qs [NP], dts [NP];

  payment_stage #(.NREP(2), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      real w;
      w = $exp(-rate(ts[nout]) * ts[nout]) * qs[nout] * dts[nout];
      checks++;
      if (!close($bitstoreal(out_term.v), w, 1e-12) || out_term.last != (nout % 5 == 4)) begin
        failures++; $display("FAIL term %0d: %g want %g", nout, $bitstoreal(out_term.v), w);
      end
      nout++;
    end
    out_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    make_curves(LEN, 4.0);
    for (int i = 0; i < NP; i++) begin
      ts[i] = 0.3 * (i + 1); qs[i] = $exp(-0.02 * ts[i]); dts[i] = 0.25 + 0.01 * i;
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
      in_p = '{tp: '{t: $realtobits(ts[i]), dt: $realtobits(dts[i]), recovery: $realtobits(0.4),
                     last: (i % 5 == 4)}, q: $realtobits(qs[i]), qprev: $realtobits(1.0)};
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    while (nout < NP) @(posedge clk);
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
