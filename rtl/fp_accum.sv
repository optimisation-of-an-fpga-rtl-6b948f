// fp_accum: double-precision accumulator that accepts one term per cycle despite a
// multi-cycle adder.
//
// A straightforward running sum would have to wait for each addition to finish (seven
// cycles for a double add) before starting the next one. Instead the sum is split into
// LAT partial sums that are used cyclically: the pipelined adder's output is fed back
// into its own input, so the LAT pipeline stages themselves hold the LAT partial sums,
// and each accepted term is added to whichever partial sum is leaving the pipeline in
// that cycle. Every LAT cycles, LAT independent additions complete. Any number of terms
// works; no padding to a multiple of LAT is needed.
//
// After the term marked `last` the unit drains the pipeline for LAT cycles, capturing
// the LAT partial sums (and leaving zeros behind for the next group), and then adds the
// partial sums one after another, each addition waiting the full adder latency. This
// serial tail costs about LAT*LAT cycles per group, small against groups of hundreds
// of terms. The split into partial sums follows the hazard-accumulation scheme of the
// engine; feeding back through the pipeline rather than keeping a separate array is
// this design's choice. Because the additions are regrouped, the result can differ from
// a left-to-right sum in the last bits.
//
// Interface: valid/ready stream of term_t in (v, last); valid/ready stream of the sum
// out, one per group. in_ready is low from the last term until the sum is taken.
module fp_accum
  import cds_pkg::*;
#(
  parameter int unsigned LAT = 7
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  term_t in_term,
  output logic  out_valid,
  input  logic  out_ready,
  output f64_t  out_sum
);
  typedef enum logic [1:0] {S_ACC, S_FLUSH, S_REDUCE, S_OUT} state_t;
  localparam int CW = $clog2(LAT + 1);

  state_t  state;
  f64_t    part [LAT];
  f64_t    acc;
  logic [CW-1:0] cnt;
  logic    busy;

  logic    add_v, add_ov;
  f64_t    add_a, add_b, add_s;

  fp64_add_pipe #(.LAT(LAT)) u_add (
    .clk, .rst_n, .in_valid(add_v), .a(add_a), .b(add_b), .out_valid(add_ov), .sum(add_s)
  );

  assign in_ready  = (state == S_ACC);
  assign out_valid = (state == S_OUT);
  assign out_sum   = acc;

  always_comb begin
    add_v = 1'b0;
    add_a = F64_ZERO;
    add_b = F64_ZERO;
    unique case (state)
      S_ACC: begin
        add_a = (in_valid) ? in_term.v : F64_ZERO;
        add_b = add_s;                       // recirculate the partial sum
      end
      S_REDUCE: begin
        if (!busy) begin
          add_v = 1'b1;
          add_a = acc;
          add_b = part[cnt];
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_ACC;
      cnt   <= '0;
      busy  <= 1'b0;
      acc   <= F64_ZERO;
      for (int i = 0; i < int'(LAT); i++) part[i] <= F64_ZERO;
    end else begin
      unique case (state)
        S_ACC: if (in_valid && in_term.last) begin
          state <= S_FLUSH;
          cnt   <= '0;
        end
        S_FLUSH: begin
          part[cnt] <= add_s;
          if (cnt == CW'(LAT - 1)) begin
            state <= S_REDUCE;
            cnt   <= CW'(1);
            busy  <= 1'b0;
          end else begin
            cnt <= cnt + 1'b1;
          end
          if (cnt == '0) acc <= add_s;       // partial sum 0 is captured now
        end
        S_REDUCE: begin
          if (!busy) busy <= 1'b1;
          if (add_ov) begin
            acc  <= add_s;
            busy <= 1'b0;
            if (cnt == CW'(LAT - 1)) state <= S_OUT;
            else cnt <= cnt + 1'b1;
          end
        end
        S_OUT: if (out_ready) state <= S_ACC;
        default: state <= S_ACC;
      endcase
    end
  end
endmodule
