// tb_time_points: generates the time points of a series of options (quarterly, half
// yearly, monthly and yearly payments, whole and broken maturities) and checks each
// point, its period and its last flag against k/f clipped to the maturity, worked out
// in real arithmetic. Options are offered back to back and the output is always
// ready, so the test also checks that the stream has no gap: one point per cycle,
// across option boundaries.
module tb_time_points;
  import cds_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  option_t in_opt;
  tpoint_t out_tp;
  int checks = 0, failures = 0;
  real m [6] = '{5.0, 0.3, 1.0, 2.75, 0.1, 3.0};
  int  f [6] = '{4, 4, 12, 2, 1, 0};
  real wt [$], wdt [$], wr [$];
  bit  wl [$];
  int  first = -1, lastc = 0, cyc = 0, npts = 0;

  time_points dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    real t, dt, rc;
    bit l;
    t = wt.pop_front(); dt = wdt.pop_front(); rc = wr.pop_front(); l = wl.pop_front();
    checks++;
    if (out_tp.t != $realtobits(t) || out_tp.last != l || out_tp.recovery != $realtobits(rc) ||
        !cds_ref_pkg::close($bitstoreal(out_tp.dt), dt, 1e-15)) begin
      failures++;
      $display("FAIL t=%g (want %g) dt=%g (want %g) last=%0d", $bitstoreal(out_tp.t), t,
               $bitstoreal(out_tp.dt), dt, out_tp.last);
    end
    if (first < 0) first = cyc;
    lastc = cyc;
    npts++;
  end

  initial begin
    real t, tp;
    int ff;
    out_ready = 1; in_valid = 0; in_opt = '0;
    for (int i = 0; i < 6; i++) begin
      ff = (f[i] == 0) ? 1 : f[i];
      tp = 0.0;
      for (int k = 1; ; k++) begin
        t = real'(k) / real'(ff);
        if (!(t < m[i])) t = m[i];
        wt.push_back(t); wdt.push_back(t - tp); wr.push_back(0.4); wl.push_back(t == m[i]);
        if (t == m[i]) break;
        tp = t;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_opt = '{maturity: $realtobits(m[i]), frequency: 32'(f[i]), recovery: $realtobits(0.4)};
      while (!in_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (wt.size() != 0) begin failures++; $display("FAIL %0d points missing", wt.size()); end
    checks++;
    // the first option's points start one cycle after it is taken; no gap after that
    if (lastc - first + 1 != npts) begin
      failures++; $display("FAIL %0d points over %0d cycles", npts, lastc - first + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
