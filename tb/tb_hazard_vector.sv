// tb_hazard_vector: streams 30 time points through the vectorised hazard bank (six
// units, curve of 48 entries written through the RAM write port) with random
// back-pressure on the output, and checks that the results come back in input order
// with the reference values. With the output always ready it also checks the gain
// from the replication: 30 points must finish in well under a third of the time a
// single unit would need (the ideal is a sixth).
module tb_hazard_vector;
  import cds_pkg::*;
  import cds_ref_pkg::*;
  localparam int DEPTH = 64;
  localparam int LEN = 48;
  localparam int NP = 30;
  logic clk = 0, rst_n = 0;
  logic [6:0] len;
  logic we;
  logic [5:0] waddr;
  rate_pt_t wdata;
  logic in_valid, in_ready, out_valid, out_ready;
  tpoint_t in_tp;
  hz_res_t out_res;
  int checks = 0, failures = 0, cyc = 0, nout = 0;
  real ts [NP];
  bit  bp = 1;

  hazard_vector #(.NREP(6), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (out_res.tp.t != $realtobits(ts[nout]) || !close($bitstoreal(out_res.h), hazard(ts[nout]), 1e-12)) begin
        failures++; $display("FAIL result %0d", nout);
      end
      nout++;
    end
    out_ready <= bp ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  task automatic run(output int cycles);
    int c0;
    nout = 0;
    c0 = cyc;
    for (int i = 0; i < NP; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_tp = '{t: $realtobits(ts[i]), dt: 64'd0, recovery: 64'd0, last: 1'b0};
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    while (nout < NP) @(posedge clk);
    cycles = cyc - c0;
  endtask

  initial begin
    int cycles;
    make_curves(LEN, 5.0);
    for (int i = 0; i < NP; i++) ts[i] = 0.2 * (i + 1);
    len = LEN; we = 0; waddr = 0; wdata = '0; in_valid = 0; in_tp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < LEN; j++) begin
      @(negedge clk);
      we = 1; waddr = 6'(j); wdata = '{t: $realtobits(hz_t[j]), v: $realtobits(hz_v[j])};
    end
    @(negedge clk) we = 0;
    run(cycles);
    bp = 0;
    run(cycles);
    checks++;
    if (cycles > NP * (LEN + 60) / 3) begin failures++; $display("FAIL %0d points took %0d cycles", NP, cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
