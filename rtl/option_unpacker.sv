// option_unpacker: turns the 512-bit memory words holding the options to be priced into
// a stream of options, one per cycle.
//
// Options enter the engine as a stream so that the engine runs continuously from one
// option to the next. A 512-bit word carries two options in 256-bit slots; slot k holds
// the maturity (double) in bits [256k+63 : 256k], the payment frequency (unsigned
// integer, payments per year) in bits [256k+95 : 256k+64] and the recovery rate
// (double) in bits [256k+191 : 256k+128]; the remaining bits are unused. The layout is
// this design's choice. `num_options` options are emitted after each `start`; the
// second slot of the last word is ignored when num_options is odd. `enable` holds the
// stream back (the engine raises it once its curve data are loaded).
module option_unpacker
  import cds_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         enable,
  input  logic [31:0]  num_options,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [511:0] in_word,
  output logic         out_valid,
  input  logic         out_ready,
  output option_t      out_opt
);
  logic [511:0] buf_w;
  logic [1:0]   left;
  logic         slot;
  logic [31:0]  sent;
  logic [255:0] s;

  assign s         = buf_w[256*slot +: 256];
  assign out_opt   = '{maturity: s[63:0], frequency: s[95:64], recovery: s[191:128]};
  assign out_valid = enable && (left != 2'd0) && (sent < num_options);
  assign in_ready  = enable && (left == 2'd0) && (sent < num_options);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_w <= '0; left <= '0; slot <= 1'b0; sent <= '0;
    end else if (start) begin
      left <= '0; slot <= 1'b0; sent <= '0;
    end else begin
      if (in_valid && in_ready) begin
        buf_w <= in_word;
        left  <= 2'd2;
        slot  <= 1'b0;
      end else if (out_valid && out_ready) begin
        sent <= sent + 1'b1;
        slot <= 1'b1;
        left <= (sent + 1 >= num_options) ? 2'd0 : left - 1'b1;
      end
    end
  end
endmodule
