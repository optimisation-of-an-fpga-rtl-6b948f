// payment_stage: present value of the expected premium payment at each time point,
//   payment(t) = D(t) * Q(t) * dt,   D(t) = exp(-r(t) * t),
// the premium paid for the period ending at t if the loan has survived to t, discounted
// with the interest rate r(t) interpolated from the interest-rate curve. Summed over an
// option's time points it is the value of paying one unit of spread a year.
//
// The interpolation is the slow part (a scan of the curve per time point), so it runs in
// an interp_vector of NREP units; the arithmetic after it takes one token per cycle.
// The formula is the standard premium-leg term (this design's choice of model; the
// engine only names the stage). Interface: valid/ready stream of prob_t in, of term_t
// (value, last time point of the option) out; the interest curve write port and length.
module payment_stage
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
  output term_t         out_term
);
  ir_res_t ir;
  f64_t    disc;

  interp_vector #(.NREP(NREP), .DEPTH(DEPTH)) u_interp (
    .clk, .rst_n, .len, .we, .waddr, .wdata,
    .in_valid, .in_ready, .in_p,
    .out_valid, .out_ready, .out_res(ir)
  );

  assign disc     = fp_exp(fp_neg(fp_mul(ir.r, ir.p.tp.t)));
  assign out_term = '{v: fp_mul(fp_mul(disc, ir.p.q), ir.p.tp.dt), last: ir.p.tp.last};
endmodule
