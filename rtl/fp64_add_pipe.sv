// fp64_add_pipe: pipelined IEEE-754 double-precision adder.
//
// One addition can start every cycle; its sum appears LAT cycles later. The engine
// takes the seven-cycle latency of a double-precision add as given, and its
// accumulation scheme (fp_accum) is built around it, so the latency is a parameter
// whose default is seven. The sum itself is computed by cds_pkg::fp_add in the first
// stage; the remaining LAT-1 stages are plain registers that model the depth of a
// real floating-point adder. Rounding is to nearest even, subnormals flush to zero.
//
// Interface: in_valid/a/b enter together; out_valid/sum leave LAT cycles later.
// There is no stall: the pipeline always advances.
module fp64_add_pipe
  import cds_pkg::*;
#(
  parameter int unsigned LAT = 7
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  f64_t a,
  input  f64_t b,
  output logic out_valid,
  output f64_t sum
);
  f64_t stage_d [LAT];
  logic stage_v [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LAT); i++) begin
        stage_d[i] <= F64_ZERO;
        stage_v[i] <= 1'b0;
      end
    end else begin
      stage_d[0] <= fp_add(a, b);
      stage_v[0] <= in_valid;
      for (int i = 1; i < int'(LAT); i++) begin
        stage_d[i] <= stage_d[i-1];
        stage_v[i] <= stage_v[i-1];
      end
    end
  end

  assign sum       = stage_d[LAT-1];
  assign out_valid = stage_v[LAT-1];
endmodule
