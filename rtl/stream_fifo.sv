// stream_fifo: first-word-fall-through FIFO carrying one stream between two dataflow
// stages, the hardware counterpart of an HLS stream.
//
// A value written with in_valid && in_ready is visible at the output on the next
// cycle. Both sides use a valid/ready handshake; a full FIFO stalls its producer and
// an empty one its consumer. The payload type and depth are parameters; the depth of
// each stream is this design's choice (the engine only requires that it be at least 1).
module stream_fifo #(
  parameter type         T     = logic [63:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [AW:0]   count;
  logic push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; count <= '0;
    end else begin
      if (push) wr <= (wr == AW'(DEPTH - 1)) ? '0 : wr + 1'b1;
      if (pop)  rd <= (rd == AW'(DEPTH - 1)) ? '0 : rd + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wr] <= in_data;

  // A full FIFO never accepts and an empty one never delivers.
  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
