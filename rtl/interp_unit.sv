// interp_unit: linear interpolation of the interest-rate curve at one time point.
//
// The curve holds len points (T_j, r_j) in ascending time. The unit reads the whole
// curve from its RAM port, one entry per cycle, keeping the last point with T_j <= t
// and the first with T_j > t. It then returns
//   r(t) = r_lo + (r_hi - r_lo) * (t - T_lo) / (T_hi - T_lo),
// or the end value of the curve when t lies before its first or after its last point
// (flat extrapolation, this design's choice). A time point takes len + 2 cycles plus
// output handshake; the whole prob_t token travels with it so the stage behind can use
// it. One token at a time.
//
// Interface: valid/ready stream of prob_t in, valid/ready stream of (token, rate) out.
// rd_addr/rd_data is a synchronous RAM read port; len >= 1.
module interp_unit
  import cds_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int AW = $clog2(DEPTH),
  localparam int LW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [LW-1:0] len,
  input  logic          in_valid,
  output logic          in_ready,
  input  prob_t         in_p,
  output logic          out_valid,
  input  logic          out_ready,
  output ir_res_t       out_res,
  output logic [AW-1:0] rd_addr,
  input  rate_pt_t      rd_data
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_CALC, S_OUT} state_t;
  state_t        state;
  prob_t         p;
  logic [LW-1:0] ri;
  logic          dv;
  logic [LW-1:0] dj;
  rate_pt_t      lo, hi;
  logic          have_lo, have_hi;
  f64_t          r;

  assign in_ready  = (state == S_IDLE);
  assign rd_addr   = ri[AW-1:0];
  assign out_valid = (state == S_OUT);
  assign out_res   = '{p: p, r: r};

  function automatic f64_t interp(rate_pt_t a, rate_pt_t b, f64_t t);
    return fp_add(a.v, fp_div(fp_mul(fp_sub(b.v, a.v), fp_sub(t, a.t)), fp_sub(b.t, a.t)));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; p <= '0; ri <= '0; dv <= 1'b0; dj <= '0;
      lo <= '0; hi <= '0; have_lo <= 1'b0; have_hi <= 1'b0; r <= F64_ZERO;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          p <= in_p; ri <= '0; dv <= 1'b0; have_lo <= 1'b0; have_hi <= 1'b0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          dv <= (ri < len);
          dj <= ri;
          if (ri < len) ri <= ri + 1'b1;
          if (dv) begin
            if (!fp_lt(p.tp.t, rd_data.t)) begin
              lo <= rd_data; have_lo <= 1'b1;
            end else if (!have_hi) begin
              hi <= rd_data; have_hi <= 1'b1;
            end
            if (dj == len - 1'b1) begin
              state <= S_CALC;
              dv    <= 1'b0;
            end
          end
        end
        S_CALC: begin
          if (!have_lo)      r <= hi.v;
          else if (!have_hi) r <= lo.v;
          else               r <= interp(lo, hi, p.tp.t);
          state <= S_OUT;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
