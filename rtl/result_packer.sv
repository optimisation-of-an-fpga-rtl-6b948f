// result_packer: packs the engine's stream of spread results (doubles, one per option)
// into 512-bit memory words, eight results per word, result k of a word in bits
// [64k+63 : 64k] in option order.
//
// A word is emitted when it is full or when the last of `num_options` results (counted
// since `start`) has been packed; slots after the last result are zero and that word
// is marked out_last. Layout and flushing rule are this design's choices. `done` is
// high once the last word has been taken. Both sides use valid/ready handshakes.
module result_packer
  import cds_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [31:0]  num_options,
  input  logic         in_valid,
  output logic         in_ready,
  input  f64_t         in_spread,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [511:0] out_word,
  output logic         out_last,
  output logic         done
);
  logic [2:0]  slot;
  logic [31:0] got;
  logic        full;

  assign in_ready  = !full && !done;
  assign out_valid = full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0; got <= '0; full <= 1'b0; out_word <= '0; out_last <= 1'b0; done <= 1'b0;
    end else if (start) begin
      slot <= '0; got <= '0; full <= 1'b0; out_word <= '0; out_last <= 1'b0; done <= 1'b0;
    end else begin
      if (full && out_ready) begin
        full     <= 1'b0;
        out_word <= '0;
        if (out_last) done <= 1'b1;
      end
      if (in_valid && in_ready) begin
        out_word[64*slot +: 64] <= in_spread;
        slot <= slot + 1'b1;
        got  <= got + 1'b1;
        if (slot == 3'd7 || got + 1 >= num_options) begin
          full     <= 1'b1;
          out_last <= (got + 1 >= num_options);
          slot     <= '0;
        end
      end
    end
  end
endmodule
