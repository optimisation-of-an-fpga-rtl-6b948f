// time_points: generates the time points of each option, the first stage of the CDS
// calculation. All later stages loop over these points.
//
// For an option with maturity m (years) and f payments per year the points are
// t_k = k/f for k = 1, 2, ... up to the first point that reaches m, which is replaced
// by m itself, so the last period may be short. Each point carries its distance to
// the previous one (dt, measured from 0 for the first point), the option's recovery
// rate and a `last` flag that marks the option boundary for the stages downstream.
// One point is produced per cycle; the next option is taken in the same cycle as the
// last point of the previous one leaves, so the stream runs without a break between
// options. The exact rule (quarterly-style regular schedule, short final period) is
// this design's choice; the engine only says that the points extend to maturity.
// A frequency of 0 is treated as 1.
module time_points
  import cds_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  option_t in_opt,
  output logic    out_valid,
  input  logic    out_ready,
  output tpoint_t out_tp
);
  option_t     opt;
  logic        busy;
  logic [31:0] k;
  f64_t        tprev, tk, t;
  logic        is_last;

  assign tk      = fp_div(fp_from_uint(k), fp_from_uint(opt.frequency == 0 ? 32'd1 : opt.frequency));
  assign is_last = !fp_lt(tk, opt.maturity);
  assign t       = is_last ? opt.maturity : tk;

  assign in_ready  = !busy || (out_ready && is_last);
  assign out_valid = busy;
  assign out_tp    = '{t: t, dt: fp_sub(t, tprev), recovery: opt.recovery, last: is_last};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; k <= '0; tprev <= F64_ZERO; opt <= '0;
    end else begin
      if (in_valid && in_ready) begin
        // next option, taken in the cycle the previous one's last point leaves
        opt   <= in_opt;
        busy  <= 1'b1;
        k     <= 32'd1;
        tprev <= F64_ZERO;
      end else if (busy && out_ready) begin
        k     <= k + 1'b1;
        tprev <= t;
        if (is_last) busy <= 1'b0;
      end
    end
  end
endmodule
