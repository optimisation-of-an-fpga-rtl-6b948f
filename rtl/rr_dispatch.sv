// rr_dispatch: round-robin scheduler of a replicated bank. Items of the input stream
// go to outputs 0, 1, ..., N-1, 0, ... strictly in turn; if the output whose turn it
// is cannot accept, the input waits (it is not given to another output), so that a
// matching rr_collect reading in the same order restores the original order.
// Valid/ready on every stream; out_valid of the current output follows in_valid
// combinationally.
module rr_dispatch #(
  parameter type         T = logic [63:0],
  parameter int unsigned N = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  T             in_data,
  output logic [N-1:0] out_valid,
  input  logic [N-1:0] out_ready,
  output T             out_data
);
  localparam int PW = (N > 1) ? $clog2(N) : 1;
  logic [PW-1:0] ptr;

  assign out_data = in_data;
  assign in_ready = out_ready[ptr];
  always_comb begin
    out_valid = '0;
    out_valid[ptr] = in_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (in_valid && in_ready) ptr <= (ptr == PW'(N - 1)) ? '0 : ptr + 1'b1;
  end
endmodule
