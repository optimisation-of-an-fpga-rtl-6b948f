// accrual_stage: accrued premium at each time point,
//   accrual(t) = D(t) * (Q(t_prev) - Q(t)) * dt / 2,
// the premium owed for the part of the period before a default, taking a default to
// happen on average half way through the period. It joins two streams in order: the
// discounted default probability from the payoff stage and the time point (for dt)
// from the default-probability stage; both carry the same sequence of time points.
// The half-period approximation is the usual one and this design's choice of model.
// One result per cycle when both inputs are present. Interface: valid/ready streams.
module accrual_stage
  import cds_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  p_valid,
  output logic  p_ready,
  input  prob_t in_p,
  input  logic  d_valid,
  output logic  d_ready,
  input  term_t in_ddq,
  output logic  out_valid,
  input  logic  out_ready,
  output term_t out_term
);
  assign out_valid = p_valid && d_valid;
  assign p_ready   = d_valid && out_ready;
  assign d_ready   = p_valid && out_ready;
  assign out_term  = '{v: fp_mul(fp_mul(in_ddq.v, in_p.tp.dt), F64_HALF), last: in_p.tp.last};

  // Both streams step through the same time points, so option boundaries coincide.
  assert property (@(posedge clk) disable iff (!rst_n) out_valid |-> in_ddq.last == in_p.tp.last);
endmodule
