// cds_top: NUM_ENGINES independent CDS engines side by side, the multi-engine
// configuration of the accelerator (five engines by default).
//
// Options do not depend on each other, so the option set is split into NUM_ENGINES
// chunks and each engine prices its own chunk from its own option stream into its own
// result stream (on the card each engine reaches its own external memory bank). Every
// engine needs the complete hazard and interest-rate curves, so the one stream of
// curve words is broadcast: a word is taken only when every engine can take it, and
// each engine then holds its own on-chip copies. `start`, `reload`, the curve lengths
// and the broadcast are shared; num_options, option words and result words are per
// engine.
// `done` is high when every engine has finished its chunk.
module cds_top
  import cds_pkg::*;
#(
  parameter int unsigned NUM_ENGINES = 5,
  parameter int unsigned NREP        = 6,
  parameter int unsigned DEPTH       = 1024,
  parameter int unsigned LAT         = 7,
  parameter int unsigned FIFO_DEPTH  = 16,
  localparam int LW = $clog2(DEPTH + 1)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  logic                               reload,
  input  logic [LW-1:0]                      hz_len,
  input  logic [LW-1:0]                      ir_len,
  input  logic                               cfg_valid,
  output logic                               cfg_ready,
  input  logic [511:0]                       cfg_word,
  input  logic [NUM_ENGINES-1:0][31:0]       num_options,
  input  logic [NUM_ENGINES-1:0]             opt_valid,
  output logic [NUM_ENGINES-1:0]             opt_ready,
  input  logic [NUM_ENGINES-1:0][511:0]      opt_word,
  output logic [NUM_ENGINES-1:0]             res_valid,
  input  logic [NUM_ENGINES-1:0]             res_ready,
  output logic [NUM_ENGINES-1:0][511:0]      res_word,
  output logic [NUM_ENGINES-1:0]             res_last,
  output logic                               loaded,
  output logic                               done
);
  logic [NUM_ENGINES-1:0] e_cfg_ready, e_loaded, e_done;

  assign cfg_ready = &e_cfg_ready;
  assign loaded    = &e_loaded;
  assign done      = &e_done;

  for (genvar e = 0; e < NUM_ENGINES; e++) begin : g_eng
    cds_engine #(.NREP(NREP), .DEPTH(DEPTH), .LAT(LAT), .FIFO_DEPTH(FIFO_DEPTH)) u_eng (
      .clk, .rst_n, .start, .reload, .hz_len, .ir_len, .num_options(num_options[e]),
      .cfg_valid(cfg_valid && cfg_ready), .cfg_ready(e_cfg_ready[e]), .cfg_word,
      .opt_valid(opt_valid[e]), .opt_ready(opt_ready[e]), .opt_word(opt_word[e]),
      .res_valid(res_valid[e]), .res_ready(res_ready[e]), .res_word(res_word[e]),
      .res_last(res_last[e]), .loaded(e_loaded[e]), .done(e_done[e])
    );
  end
endmodule
