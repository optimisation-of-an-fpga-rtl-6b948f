// cds_engine: one credit default swap (CDS) engine, a dataflow pipeline that prices a
// stream of options (CDS contracts) against a fixed hazard-rate curve and a fixed
// interest-rate curve, returning each option's spread in basis points.
//
// All stages run concurrently and are joined by FIFO streams; nothing is restarted
// between options, so the time points of the next option follow those of the previous
// one through the pipeline without a gap:
//
//   option words -> option_unpacker -> time_points -> hazard_vector (NREP hazard units)
//     -> default_prob -+-> payment_stage (NREP interpolations) -> fp_accum -+
//                      +-> payoff_stage  (NREP interpolations) -> fp_accum -+-> combine_spread
//                      |        +-- discounted default prob --+              |     -> result_packer
//                      +-------------------------------> accrual_stage -> fp_accum -+   -> result words
//
// Per time point streams run between the stages up to the three accumulators; per
// option streams run from the accumulators to the final combination. At start-up
// rate_loader copies the two curves from 512-bit words into the on-chip RAM copies of
// the hazard bank and of both interpolation banks; options are only taken once that is
// complete (`loaded`); the curves load once after reset, and again after a `reload`
// pulse. After reset or a `start` pulse the engine prices num_options options and
// raises `done` when the last result word has been taken.
//
// Throughput is set by the scans of the curves: a hazard unit needs about len + 60
// cycles and an interpolation unit about len + 4 per time point, divided by NREP
// because of the replication. FIFO depths are this design's choice.
module cds_engine
  import cds_pkg::*;
#(
  parameter int unsigned NREP       = 6,
  parameter int unsigned DEPTH      = 1024,
  parameter int unsigned LAT        = 7,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int AW = $clog2(DEPTH),
  localparam int LW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          reload,
  input  logic [LW-1:0] hz_len,
  input  logic [LW-1:0] ir_len,
  input  logic [31:0]   num_options,
  input  logic          cfg_valid,
  output logic          cfg_ready,
  input  logic [511:0]  cfg_word,
  input  logic          opt_valid,
  output logic          opt_ready,
  input  logic [511:0]  opt_word,
  output logic          res_valid,
  input  logic          res_ready,
  output logic [511:0]  res_word,
  output logic          res_last,
  output logic          loaded,
  output logic          done
);
  // curve loading
  logic hz_we, ir_we;
  logic [AW-1:0] waddr;
  rate_pt_t wdata;

  rate_loader #(.DEPTH(DEPTH)) u_load (
    .clk, .rst_n, .start(reload), .hz_len, .ir_len,
    .in_valid(cfg_valid), .in_ready(cfg_ready), .in_word(cfg_word),
    .hz_we, .ir_we, .waddr, .wdata, .loaded
  );

  // options and time points
  logic    o_v, o_r;
  option_t o_d;
  option_unpacker u_unpack (
    .clk, .rst_n, .start, .enable(loaded), .num_options,
    .in_valid(opt_valid), .in_ready(opt_ready), .in_word(opt_word),
    .out_valid(o_v), .out_ready(o_r), .out_opt(o_d)
  );

  logic    tp_v, tp_r, tq_v, tq_r;
  tpoint_t tp_d, tq_d;
  time_points u_tp (
    .clk, .rst_n, .in_valid(o_v), .in_ready(o_r), .in_opt(o_d),
    .out_valid(tp_v), .out_ready(tp_r), .out_tp(tp_d)
  );
  stream_fifo #(.T(tpoint_t), .DEPTH(FIFO_DEPTH)) u_f_tp (
    .clk, .rst_n, .in_valid(tp_v), .in_ready(tp_r), .in_data(tp_d),
    .out_valid(tq_v), .out_ready(tq_r), .out_data(tq_d)
  );

  // hazard and default probability
  logic    hz_v, hz_r;
  hz_res_t hz_d;
  hazard_vector #(.NREP(NREP), .DEPTH(DEPTH), .LAT(LAT)) u_hazard (
    .clk, .rst_n, .len(hz_len), .we(hz_we), .waddr, .wdata,
    .in_valid(tq_v), .in_ready(tq_r), .in_tp(tq_d),
    .out_valid(hz_v), .out_ready(hz_r), .out_res(hz_d)
  );

  logic [2:0] pb_v, pb_r;
  prob_t      pb_d;
  default_prob u_prob (
    .clk, .rst_n, .in_valid(hz_v), .in_ready(hz_r), .in_res(hz_d),
    .out_valid(pb_v), .out_ready(pb_r), .out_p(pb_d)
  );

  // one FIFO per consumer: 0 payment, 1 payoff, 2 accrual
  logic [2:0] pq_v, pq_r;
  prob_t      pq_d [3];
  for (genvar i = 0; i < 3; i++) begin : g_pfifo
    stream_fifo #(.T(prob_t), .DEPTH(FIFO_DEPTH)) u_f (
      .clk, .rst_n, .in_valid(pb_v[i]), .in_ready(pb_r[i]), .in_data(pb_d),
      .out_valid(pq_v[i]), .out_ready(pq_r[i]), .out_data(pq_d[i])
    );
  end

  // per time point terms: 0 payment, 1 payoff, 2 accrual
  logic [2:0] tm_v, tm_r, tf_v, tf_r;
  term_t      tm_d [3];
  term_t      tf_d [3];
  logic       dq_v, dq_r, dqf_v, dqf_r;
  term_t      dq_d, dqf_d;

  payment_stage #(.NREP(NREP), .DEPTH(DEPTH)) u_pay (
    .clk, .rst_n, .len(ir_len), .we(ir_we), .waddr, .wdata,
    .in_valid(pq_v[0]), .in_ready(pq_r[0]), .in_p(pq_d[0]),
    .out_valid(tm_v[0]), .out_ready(tm_r[0]), .out_term(tm_d[0])
  );

  payoff_stage #(.NREP(NREP), .DEPTH(DEPTH)) u_pof (
    .clk, .rst_n, .len(ir_len), .we(ir_we), .waddr, .wdata,
    .in_valid(pq_v[1]), .in_ready(pq_r[1]), .in_p(pq_d[1]),
    .out_valid(tm_v[1]), .out_ready(tm_r[1]), .out_term(tm_d[1]),
    .acc_valid(dq_v), .acc_ready(dq_r), .acc_term(dq_d)
  );

  stream_fifo #(.T(term_t), .DEPTH(FIFO_DEPTH)) u_f_dq (
    .clk, .rst_n, .in_valid(dq_v), .in_ready(dq_r), .in_data(dq_d),
    .out_valid(dqf_v), .out_ready(dqf_r), .out_data(dqf_d)
  );

  accrual_stage u_acr (
    .clk, .rst_n,
    .p_valid(pq_v[2]), .p_ready(pq_r[2]), .in_p(pq_d[2]),
    .d_valid(dqf_v), .d_ready(dqf_r), .in_ddq(dqf_d),
    .out_valid(tm_v[2]), .out_ready(tm_r[2]), .out_term(tm_d[2])
  );

  // accumulation over the time points of each option
  logic [2:0] sm_v, sm_r;
  f64_t       sm_d [3];
  for (genvar i = 0; i < 3; i++) begin : g_acc
    stream_fifo #(.T(term_t), .DEPTH(FIFO_DEPTH)) u_f (
      .clk, .rst_n, .in_valid(tm_v[i]), .in_ready(tm_r[i]), .in_data(tm_d[i]),
      .out_valid(tf_v[i]), .out_ready(tf_r[i]), .out_data(tf_d[i])
    );
    fp_accum #(.LAT(LAT)) u_acc (
      .clk, .rst_n, .in_valid(tf_v[i]), .in_ready(tf_r[i]), .in_term(tf_d[i]),
      .out_valid(sm_v[i]), .out_ready(sm_r[i]), .out_sum(sm_d[i])
    );
  end

  // spread and result words
  logic sp_v, sp_r;
  f64_t sp_d;
  combine_spread u_comb (
    .pay_valid(sm_v[0]), .pof_valid(sm_v[1]), .acr_valid(sm_v[2]),
    .in_ready(sm_r), .pay_sum(sm_d[0]), .pof_sum(sm_d[1]), .acr_sum(sm_d[2]),
    .out_valid(sp_v), .out_ready(sp_r), .out_spread(sp_d)
  );

  result_packer u_pack (
    .clk, .rst_n, .start, .num_options,
    .in_valid(sp_v), .in_ready(sp_r), .in_spread(sp_d),
    .out_valid(res_valid), .out_ready(res_ready), .out_word(res_word),
    .out_last(res_last), .done
  );
endmodule
