// tb_interp_unit: interpolates a 37-point interest-rate curve at time points before,
// between, on and after its points and compares each rate with the reference
// interpolation of cds_ref_pkg (relative tolerance 1e-13); checks that the token
// travels with the result and that a point takes one cycle per curve entry plus a few.
module tb_interp_unit;
  import cds_pkg::*;
  import cds_ref_pkg::*;
  localparam int DEPTH = 64;
  localparam int LEN = 37;
  logic clk = 0, rst_n = 0;
  logic [6:0] len;
  logic in_valid, in_ready, out_valid, out_ready;
  prob_t in_p;
  ir_res_t out_res;
  logic [5:0] rd_addr;
  rate_pt_t rd_data;
  rate_pt_t mem [DEPTH];
  int checks = 0, failures = 0, cyc = 0, t0;
  real ts [$];

  interp_unit #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) rd_data <= mem[rd_addr];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    make_curves(LEN, 6.0);                   // points from 0.5 to ~6.3 years
    for (int j = 0; j < DEPTH; j++)
      mem[j] = (j < LEN) ? '{t: $realtobits(ir_t[j]), v: $realtobits(ir_v[j])} : '0;
    ts = '{0.1, 0.5, ir_t[5], 1.234, 3.3, 5.999, 7.0};
    for (int i = 0; i < 10; i++) ts.push_back(real'($urandom_range(1, 7000)) / 1000.0);
    len = LEN;
    in_valid = 0; in_p = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ts[i]) begin
      @(negedge clk);
      in_valid = 1;
      in_p = '{tp: '{t: $realtobits(ts[i]), dt: 64'(i), recovery: 64'd0, last: 1'b0},
               q: 64'(i * 3), qprev: 64'(i * 5)};
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      t0 = cyc;
      @(negedge clk) in_valid = 0;
      while (!out_valid) @(negedge clk);
      checks++;
      if (!close($bitstoreal(out_res.r), rate(ts[i]), 1e-13) || out_res.p.q != 64'(i * 3) ||
          out_res.p.qprev != 64'(i * 5) || out_res.p.tp.dt != 64'(i)) begin
        failures++;
        $display("FAIL t=%g r=%g want %g", ts[i], $bitstoreal(out_res.r), rate(ts[i]));
      end
      checks++;
      if (cyc - t0 < LEN || cyc - t0 > LEN + 5) begin failures++; $display("FAIL took %0d cycles", cyc - t0); end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
