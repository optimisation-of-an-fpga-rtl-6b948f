// tb_fp_accum: feeds groups of random double terms (group lengths from 1 to 40, not
// multiples of seven, with random gaps in the input and random back-pressure on the
// output) into the interleaved accumulator and compares each group's sum with a
// sum formed in real arithmetic. Also checks that a dense group of n terms is taken
// at one term per cycle.
module tb_fp_accum;
  import cds_pkg::*;
  localparam int LAT = 7;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  term_t in_term;
  f64_t out_sum;
  int checks = 0, failures = 0;
  real want_q [$];
  int cycle = 0;

  fp_accum #(.LAT(LAT)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) out_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && out_valid && out_ready) begin
      real w, g, d;
      w = want_q.pop_front();
      g = $bitstoreal(out_sum);
      d = g - w; if (d < 0) d = -d;
      checks++;
      if (d > 1e-12 * (w < 0 ? -w : w) + 1e-300) begin
        failures++;
        $display("FAIL sum got %g want %g", g, w);
      end
    end
  end

  task automatic send_group(int n, bit gaps, output int cycles_taken);
    real s, x;
    int c0;
    s = 0.0;
    c0 = -1;
    for (int i = 0; i < n; i++) begin
      x = (real'($urandom_range(0, 2000000)) - 1000000.0) / 1000.0;
      s += x;
      @(negedge clk);
      while (gaps && $urandom_range(0, 2) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1; in_term.v = $realtobits(x); in_term.last = (i == n - 1);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      if (c0 < 0) c0 = cycle;
      cycles_taken = cycle - c0 + 1;
    end
    @(negedge clk) in_valid = 0;
    want_q.push_back(s);
  endtask

  initial begin
    int ct;
    in_valid = 0; in_term = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 1; g <= 40; g++) send_group(g, g % 3 == 0, ct);
    send_group(100, 0, ct);
    checks++;
    if (ct != 100) begin failures++; $display("FAIL rate: 100 terms took %0d cycles", ct); end
    send_group(1024, 0, ct);
    wait (want_q.size() == 0);
    repeat (5) @(posedge clk);
    checks++;
    if (want_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
