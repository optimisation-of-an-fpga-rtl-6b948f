// tb_fp64_add_pipe: checks the pipelined double adder against the simulator's own
// double arithmetic (real), on random operands of mixed signs and magnitudes and on
// cancellation cases, and checks that every sum appears exactly LAT cycles after
// its operands. Also exercises the shared multiply, divide, conversion and
// exponential functions of cds_pkg against real arithmetic.
module tb_fp64_add_pipe;
  import cds_pkg::*;
  localparam int LAT = 7;
  localparam int N = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  f64_t a, b, sum;
  logic out_valid;
  int checks = 0, failures = 0;
  f64_t exp_q [$];
  int   t_in [$];
  int cycle = 0;

  fp64_add_pipe #(.LAT(LAT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic real rnd();
    real m;
    int  s;
    m = real'($urandom_range(1, 1000000)) / 1000.0;
    s = $urandom_range(0, 12) - 6;
    m = m * (10.0 ** s);
    if ($urandom_range(0, 1)) m = -m;
    return m;
  endfunction

  function automatic logic close(real x, real y, real tol);
    real d;
    d = x - y;
    if (d < 0) d = -d;
    if (y < 0) y = -y;
    return d <= tol * y || d < 1e-300;
  endfunction

  // Scalar checks of the other package functions.
  task automatic check_fn(string what, real got, real want, real tol);
    checks++;
    if (!close(got, want, tol)) begin
      failures++;
      $display("FAIL %s: got %g want %g", what, got, want);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    f64_t w;
    int   t0;
    w  = exp_q.pop_front();
    t0 = t_in.pop_front();
    checks++;
    if (sum !== w || cycle - t0 != LAT) begin
      failures++;
      $display("FAIL add: got %h want %h latency %0d", sum, w, cycle - t0);
    end
  end

  initial begin
    real x, y;
    in_valid = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      x = rnd();
      y = (i % 5 == 0) ? -x * (1.0 + 1e-9 * $urandom_range(0, 50)) : rnd();
      @(negedge clk);
      in_valid = 1; a = $realtobits(x); b = $realtobits(y);
      exp_q.push_back((x + y == 0.0) ? 64'd0 : $realtobits(x + y));
      t_in.push_back(cycle);
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d sums missing", exp_q.size()); end
    checks++;

    // other package arithmetic
    for (int i = 0; i < 200; i++) begin
      x = rnd(); y = rnd();
      check_fn("mul", $bitstoreal(fp_mul($realtobits(x), $realtobits(y))), x * y, 0.0);
      check_fn("div", $bitstoreal(fp_div($realtobits(x), $realtobits(y))), x / y, 0.0);
      x = real'($urandom_range(0, 60000)) / 1000.0 - 40.0;
      check_fn("exp", $bitstoreal(fp_exp($realtobits(x))), $exp(x), 1e-14);
    end
    for (int k = -50; k < 50; k += 7)
      check_fn("int", $bitstoreal(fp_from_int(k)), real'(k), 0.0);
    check_fn("lt", real'(fp_lt($realtobits(-1.0), $realtobits(0.5))), 1.0, 0.0);
    check_fn("lt2", real'(fp_lt($realtobits(2.0), $realtobits(0.5))), 0.0, 0.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
