// rr_collect: round-robin collector of a replicated bank. Takes one item from input 0,
// then input 1, ..., N-1, 0, ... strictly in turn, waiting on the input whose turn it
// is, so results leave in the order rr_dispatch handed the work out.
// Valid/ready on every stream.
module rr_collect #(
  parameter type         T = logic [63:0],
  parameter int unsigned N = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  T             in_data [N],
  output logic         out_valid,
  input  logic         out_ready,
  output T             out_data
);
  localparam int PW = (N > 1) ? $clog2(N) : 1;
  logic [PW-1:0] ptr;

  assign out_valid = in_valid[ptr];
  assign out_data  = in_data[ptr];
  always_comb begin
    in_ready = '0;
    in_ready[ptr] = out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (out_valid && out_ready) ptr <= (ptr == PW'(N - 1)) ? '0 : ptr + 1'b1;
  end
endmodule
