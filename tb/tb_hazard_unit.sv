// tb_hazard_unit: integrates a 40-entry hazard curve (time points before, inside and
// after the curve, and exactly on curve points) and compares each result with the
// reference integral of cds_ref_pkg (relative tolerance 1e-12). The curve sits in a
// testbench memory with one cycle of read latency. Also checks the time a point takes:
// one curve entry per cycle, plus the accumulator's drain and final summation.
module tb_hazard_unit;
  import cds_pkg::*;
  import cds_ref_pkg::*;
  localparam int DEPTH = 64;
  localparam int LEN = 40;
  logic clk = 0, rst_n = 0;
  logic [6:0] len;
  logic in_valid, in_ready, out_valid, out_ready;
  tpoint_t in_tp;
  hz_res_t out_res;
  logic [5:0] rd_addr;
  rate_pt_t rd_data;
  rate_pt_t mem [DEPTH];
  int checks = 0, failures = 0, cyc = 0, t0;
  real ts [8] = '{0.01, 0.5, 1.0, 2.37, 3.9, 4.0, 5.5, 9.0};

  hazard_unit #(.DEPTH(DEPTH)) dut (.*);
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
    make_curves(LEN, 4.0);                  // last curve point at 4.0 years
    for (int j = 0; j < DEPTH; j++)
      mem[j] = (j < LEN) ? '{t: $realtobits(hz_t[j]), v: $realtobits(hz_v[j])} : '1;
    len = LEN;
    in_valid = 0; in_tp = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ts[i]) begin
      @(negedge clk);
      in_valid = 1;
      in_tp = '{t: $realtobits(ts[i]), dt: $realtobits(0.25), recovery: $realtobits(0.4), last: i[0]};
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      t0 = cyc;
      @(negedge clk) in_valid = 0;
      while (!out_valid) @(negedge clk);
      checks++;
      if (!close($bitstoreal(out_res.h), hazard(ts[i]), 1e-12) || out_res.tp.t != $realtobits(ts[i]) ||
          out_res.tp.last != i[0]) begin
        failures++;
        $display("FAIL t=%g H=%g want %g", ts[i], $bitstoreal(out_res.h), hazard(ts[i]));
      end
      checks++;
      if (cyc - t0 < LEN || cyc - t0 > LEN + 7 + 7 * 7 + 8) begin
        failures++; $display("FAIL point took %0d cycles", cyc - t0);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
