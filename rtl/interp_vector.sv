// interp_vector: the vectorised interest-rate interpolation used inside the payment and
// the payoff stage. A round-robin scheduler hands successive time points to NREP
// interpolation units working concurrently on different time points, and a round-robin
// collector takes the interpolated rates back in the same order.
//
// Each unit reads its own port of an on-chip copy of the interest-rate curve; copies
// are dual-ported, so ceil(NREP/2) copies are kept, all written together when the curve
// is loaded. Interface: valid/ready streams of prob_t tokens in and of (token, rate)
// out; the RAM write port used at initialisation; len is the number of curve points.
module interp_vector
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
  output ir_res_t       out_res
);
  localparam int NRAM = (NREP + 1) / 2;

  logic [NREP-1:0] u_iv, u_ir, u_ov, u_or;
  prob_t           u_p;
  ir_res_t         u_res [NREP];
  logic [AW-1:0]   ra [2*NRAM];
  rate_pt_t        rdat [2*NRAM];

  rr_dispatch #(.T(prob_t), .N(NREP)) u_sched (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_p),
    .out_valid(u_iv), .out_ready(u_ir), .out_data(u_p)
  );

  for (genvar m = 0; m < NRAM; m++) begin : g_ram
    rate_ram #(.DEPTH(DEPTH)) u_ram (
      .clk, .we, .waddr, .wdata,
      .rd_addr(ra[2*m +: 2]), .rd_data(rdat[2*m +: 2])
    );
  end

  if (2 * NRAM > NREP) begin : g_spare
    assign ra[2*NRAM-1] = '0;
  end

  for (genvar i = 0; i < NREP; i++) begin : g_unit
    interp_unit #(.DEPTH(DEPTH)) u_ip (
      .clk, .rst_n, .len,
      .in_valid(u_iv[i]), .in_ready(u_ir[i]), .in_p(u_p),
      .out_valid(u_ov[i]), .out_ready(u_or[i]), .out_res(u_res[i]),
      .rd_addr(ra[i]), .rd_data(rdat[i])
    );
  end

  rr_collect #(.T(ir_res_t), .N(NREP)) u_coll (
    .clk, .rst_n, .in_valid(u_ov), .in_ready(u_or), .in_data(u_res),
    .out_valid, .out_ready, .out_data(out_res)
  );
endmodule
