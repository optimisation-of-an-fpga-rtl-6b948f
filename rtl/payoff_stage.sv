// payoff_stage: present value of the expected payoff at each time point,
//   payoff(t) = D(t) * (Q(t_prev) - Q(t)) * (1 - R),   D(t) = exp(-r(t) * t),
// what the protection seller pays, a notional less the recovery rate R, if the loan
// defaults within the period ending at t, discounted with the interpolated interest
// rate. It also passes the discounted default probability D(t) * (Q(t_prev) - Q(t)) on
// to the accrual stage, which has no interpolation of its own.
//
// The interpolation runs in an interp_vector of NREP units. The two outputs form a
// fork: a result leaves to both in the same cycle. The formula is the standard
// protection-leg term (this design's choice of model). Interface: valid/ready stream of
// prob_t in; valid/ready streams of term_t out (payoff term, and discounted default
// probability for the accrual); the interest curve write port and length.
module payoff_stage
  import cds_pkg::*;
#(
  parameter int unsigned NREP  = 6,
  parameter int unsigned DEPTH = 1024,
  localparam int AW = $clog2(DEPTH),
  localparam int LW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [LW-1:0] len,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  rate_pt_t      wdata,
  input  logic          in_valid,
  output logic          in_ready,
  input  prob_t         in_p,
  output logic          out_valid,
  input  logic          out_ready,
  output term_t         out_term,
  output logic          acc_valid,
  input  logic          acc_ready,
  output term_t         acc_term
);
  ir_res_t ir;
  logic    ir_valid, ir_ready;
  f64_t    disc, ddq;

  interp_vector #(.NREP(NREP), .DEPTH(DEPTH)) u_interp (
    .clk, .rst_n, .len, .we, .waddr, .wdata,
    .in_valid, .in_ready, .in_p,
    .out_valid(ir_valid), .out_ready(ir_ready), .out_res(ir)
  );

  assign disc      = fp_exp(fp_neg(fp_mul(ir.r, ir.p.tp.t)));
  assign ddq       = fp_mul(disc, fp_sub(ir.p.qprev, ir.p.q));
  assign ir_ready  = out_ready && acc_ready;
  assign out_valid = ir_valid && ir_ready;
  assign acc_valid = ir_valid && ir_ready;
  assign out_term  = '{v: fp_mul(ddq, fp_sub(F64_ONE, ir.p.tp.recovery)), last: ir.p.tp.last};
  assign acc_term  = '{v: ddq, last: ir.p.tp.last};
endmodule
