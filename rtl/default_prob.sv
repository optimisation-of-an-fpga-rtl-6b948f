// default_prob: the "probability of defaulting at time point" stage. It takes the
// integrated hazard H(t) of each time point, in order, from the hazard bank and forms
// the survival probability Q(t) = exp(-H(t)); the probability of default within the
// period is Q(t_prev) - Q(t). Each time point leaves as a prob_t token carrying Q(t)
// and Q(t_prev) (Q = 1 before the first point of an option), and is sent to the three
// consumers: the payment, payoff and accrual stages.
//
// The three outputs are a fork: a token leaves to all three in the same cycle, so the
// stage waits until all three can take it (each feeds a FIFO, so this costs little).
// The exponential is computed combinationally (cds_pkg::fp_exp); one token per cycle.
module default_prob
  import cds_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  hz_res_t      in_res,
  output logic [2:0]   out_valid,
  input  logic [2:0]   out_ready,
  output prob_t        out_p
);
  f64_t qprev;
  f64_t q;

  assign q         = fp_exp(fp_neg(in_res.h));
  assign in_ready  = &out_ready;
  assign out_valid = {3{in_valid && in_ready}};
  assign out_p     = '{tp: in_res.tp, q: q, qprev: qprev};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) qprev <= F64_ONE;
    else if (in_valid && in_ready) qprev <= in_res.tp.last ? F64_ONE : q;
  end
endmodule
