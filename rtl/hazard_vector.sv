// hazard_vector: the vectorised hazard calculation. A round-robin scheduler hands
// successive time points to NREP hazard units, which integrate the hazard curve for
// different time points at the same time, and a round-robin collector takes their
// results back in the same cyclic order, so the stream leaves in the order it came in.
// With six units, six time points are in progress at once, and one result leaves about
// every (len + 60) / 6 cycles instead of every len + 60.
//
// Each hazard unit reads its own port of an on-chip copy of the hazard curve; a copy
// is dual-ported, so ceil(NREP/2) copies are kept and all are written together when
// the curve is loaded. Interface: valid/ready streams of time points in and of
// (time point, integrated hazard) out; the RAM write port (we, waddr, wdata) used at
// initialisation; len is the number of curve entries.
module hazard_vector
  import cds_pkg::*;
#(
  parameter int unsigned NREP  = 6,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LAT   = 7,
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
  input  tpoint_t       in_tp,
  output logic          out_valid,
  input  logic          out_ready,
  output hz_res_t       out_res
);
  localparam int NRAM = (NREP + 1) / 2;

  logic [NREP-1:0] u_iv, u_ir, u_ov, u_or;
  tpoint_t         u_tp;
  hz_res_t         u_res [NREP];
  logic [AW-1:0]   ra [2*NRAM];
  rate_pt_t        rdat [2*NRAM];

  rr_dispatch #(.T(tpoint_t), .N(NREP)) u_sched (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_tp),
    .out_valid(u_iv), .out_ready(u_ir), .out_data(u_tp)
  );

  for (genvar m = 0; m < NRAM; m++) begin : g_ram
    rate_ram #(.DEPTH(DEPTH)) u_ram (
      .clk, .we, .waddr, .wdata,
      .rd_addr(ra[2*m +: 2]), .rd_data(rdat[2*m +: 2])
    );
  end

  if (2 * NRAM > NREP) begin : g_spare
    assign ra[2*NRAM-1] = '0;   // unused second port of the last copy
  end

  for (genvar i = 0; i < NREP; i++) begin : g_unit
    hazard_unit #(.DEPTH(DEPTH), .LAT(LAT)) u_hz (
      .clk, .rst_n, .len,
      .in_valid(u_iv[i]), .in_ready(u_ir[i]), .in_tp(u_tp),
      .out_valid(u_ov[i]), .out_ready(u_or[i]), .out_res(u_res[i]),
      .rd_addr(ra[i]), .rd_data(rdat[i])
    );
  end

  rr_collect #(.T(hz_res_t), .N(NREP)) u_coll (
    .clk, .rst_n, .in_valid(u_ov), .in_ready(u_or), .in_data(u_res),
    .out_valid, .out_ready, .out_data(out_res)
  );
endmodule
