// rate_loader: reads the constant curve data of the engine, which arrives as 512-bit
// memory words, and writes it into the on-chip curve stores.
//
// The engine fetches its external data in 512-bit words. A word here carries four
// (time, rate) pairs: pair k occupies bits [128k+127 : 128k], the time in the upper
// 64 bits of the pair and the rate in the lower 64. The first ceil(hz_len/4) words
// hold the hazard curve, the following ceil(ir_len/4) words the interest-rate curve;
// unused pairs of a curve's last word are ignored. The word layout is this design's
// choice. One pair is written per cycle, to every copy of a curve at once (the copies
// share the write port signals). `loaded` rises when both curves are complete and
// stays high until `start` re-arms the loader for a new set of curves.
module rate_loader
  import cds_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int AW = $clog2(DEPTH),
  localparam int LW = $clog2(DEPTH + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [LW-1:0]  hz_len,
  input  logic [LW-1:0]  ir_len,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [511:0]   in_word,
  output logic           hz_we,
  output logic           ir_we,
  output logic [AW-1:0]  waddr,
  output rate_pt_t       wdata,
  output logic           loaded
);
  logic [511:0] buf_w;
  logic [2:0]   left;     // pairs of buf_w still to write (0 = buffer empty)
  logic [1:0]   slot;
  logic         curve;    // 0 hazard, 1 interest
  logic [LW-1:0] idx;

  logic [LW-1:0] len;
  assign len = curve ? ir_len : hz_len;

  assign in_ready = !loaded && (left == 3'd0);
  assign wdata    = buf_w[128*slot +: 128];
  assign waddr    = idx[AW-1:0];
  assign hz_we    = (left != 3'd0) && !curve && (idx < hz_len);
  assign ir_we    = (left != 3'd0) &&  curve && (idx < ir_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left <= '0; slot <= '0; curve <= 1'b0; idx <= '0; loaded <= 1'b0; buf_w <= '0;
    end else if (start) begin
      left <= '0; slot <= '0; curve <= 1'b0; idx <= '0; loaded <= 1'b0;
    end else if (!loaded) begin
      if (left == 3'd0) begin
        if (curve == 1'b0 && hz_len == '0) curve <= 1'b1;
        else if (curve == 1'b1 && ir_len == '0) loaded <= 1'b1;
        else if (in_valid) begin
          buf_w <= in_word;
          left  <= 3'd4;
          slot  <= 2'd0;
        end
      end else begin
        slot <= slot + 1'b1;
        left <= left - 1'b1;
        if (idx + 1'b1 >= len) begin
          // curve complete: drop the rest of this word
          left <= 3'd0;
          idx  <= '0;
          if (curve) loaded <= 1'b1;
          else curve <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end
endmodule
