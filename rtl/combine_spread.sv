// combine_spread: the last stage of the engine. For each option it joins the three
// sums over the option's time points and forms the spread in basis points,
//   spread = 10000 * payoff / (payment + accrual),
// the annual premium, as a fraction of the notional times 10^4, at which the expected
// premium income (payments plus accrued premium) equals the expected payoff. The three
// inputs arrive one per option in the same option order. One result per cycle.
// Interface: valid/ready streams of doubles.
module combine_spread
  import cds_pkg::*;
(
  input  logic       pay_valid,
  input  logic       pof_valid,
  input  logic       acr_valid,
  output logic [2:0] in_ready,   // {accrual, payoff, payment}
  input  f64_t       pay_sum,
  input  f64_t       pof_sum,
  input  f64_t       acr_sum,
  output logic       out_valid,
  input  logic       out_ready,
  output f64_t       out_spread
);
  assign out_valid  = pay_valid && pof_valid && acr_valid;
  assign in_ready   = {3{out_valid && out_ready}};
  assign out_spread = fp_mul(fp_div(pof_sum, fp_add(pay_sum, acr_sum)), F64_1E4);
endmodule
