// hazard_unit: the hazard calculation for one time point. It integrates the hazard
// curve from 0 to the time point t, the quantity whose exponential gives the
// probability that the loan has survived (not defaulted) up to t.
//
// The hazard curve is piecewise constant: entry j = (T_j, h_j) gives the hazard rate h_j
// on (T_{j-1}, T_j], with T_{-1} = 0, and the last rate continues beyond the last
// point. The unit reads the curve from its RAM port one entry per cycle, forms
//   term_j = h_j * (min(t, T_j) - T_{j-1})   when positive, else 0
// and streams the terms into fp_accum, which sums them at one term per cycle despite
// the seven-cycle adder by cycling through seven partial sums. Every entry of the curve
// is visited whatever t is, so each time point takes len + about 60 cycles. The curve
// convention (left-continuous steps, flat extrapolation) is this design's choice.
//
// Interface: valid/ready stream of time points in, valid/ready stream of (time point,
// integrated hazard) out; one time point at a time. rd_addr/rd_data is a synchronous
// RAM read port (data one cycle after the address); len is the curve length (>= 1).
module hazard_unit
  import cds_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LAT   = 7,
  localparam int AW = $clog2(DEPTH),
  localparam int LW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [LW-1:0] len,
  input  logic          in_valid,
  output logic          in_ready,
  input  tpoint_t       in_tp,
  output logic          out_valid,
  input  logic          out_ready,
  output hz_res_t       out_res,
  output logic [AW-1:0] rd_addr,
  input  rate_pt_t      rd_data
);
  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_WAIT} state_t;
  state_t        state;
  tpoint_t       tp;
  logic [LW-1:0] ri;       // next entry to read
  logic          dv;       // rd_data holds entry dj
  logic [LW-1:0] dj;
  f64_t          tprev;    // T_{dj-1}

  logic  acc_iv, acc_ir, acc_ov;
  term_t acc_in;
  f64_t  acc_sum, hi, seg;

  fp_accum #(.LAT(LAT)) u_acc (
    .clk, .rst_n, .in_valid(acc_iv), .in_ready(acc_ir), .in_term(acc_in),
    .out_valid(acc_ov), .out_ready(out_ready && state == S_WAIT), .out_sum(acc_sum)
  );

  assign in_ready = (state == S_IDLE);
  assign rd_addr  = ri[AW-1:0];

  always_comb begin
    hi  = (dj == len - 1'b1 || fp_lt(tp.t, rd_data.t)) ? tp.t : rd_data.t;
    seg = fp_sub(hi, tprev);
    acc_iv = dv;
    acc_in.v    = (fp_lt(tprev, hi)) ? fp_mul(rd_data.v, seg) : F64_ZERO;
    acc_in.last = (dj == len - 1'b1);
  end

  assign out_valid = (state == S_WAIT) && acc_ov;
  assign out_res   = '{tp: tp, h: acc_sum};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; tp <= '0; ri <= '0; dv <= 1'b0; dj <= '0; tprev <= F64_ZERO;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          tp    <= in_tp;
          ri    <= '0;
          dv    <= 1'b0;
          tprev <= F64_ZERO;
          state <= S_SCAN;
        end
        S_SCAN: begin
          // issue one read per cycle; the accumulator takes one term per cycle
          dv <= (ri < len);
          dj <= ri;
          if (ri < len) ri <= ri + 1'b1;
          if (dv) tprev <= rd_data.t;
          if (dv && acc_in.last) begin
            state <= S_WAIT;
            dv    <= 1'b0;
          end
        end
        S_WAIT: if (out_valid && out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // The accumulator is in its accepting phase for the whole scan.
  assert property (@(posedge clk) disable iff (!rst_n) acc_iv |-> acc_ir);
endmodule
