// tb_cds_scaling: the one- and two-engine configurations of the accelerator, run side by
// side on the same 1024-point curves (one broadcast curve stream feeds both).
//
// The one-engine accelerator prices six options; the two-engine accelerator prices the
// same six split into two chunks of three. All options have the same schedule
// (3 years, quarterly: 12 time points) and differ in recovery rate and maturity only
// slightly, so the work is even. Every spread is checked against the reference
// model, and the test checks that two engines finish the batch in close to half the
// time of one (speed-up above 1.8), the near-linear scaling expected from engines that
// share nothing but the curve data.
module tb_cds_scaling;
  import cds_pkg::*;
  import cds_ref_pkg::*;

  localparam int NCURVE = 1024;
  localparam int NO = 6;

  logic clk = 0, rst_n = 0;
  logic [10:0] len;
  logic cfg_valid, cfg_ready, cfg_ready1, cfg_ready2;
  logic [511:0] cfg_w;
  logic loaded1, loaded2, done1, done2;

  // lane 0: the single engine; lanes 1 and 2: the two engines of the second accelerator
  logic [2:0] lv, lr, rv, rrdy, rl;
  logic [511:0] lw [3];
  logic [511:0] rw [3];
  logic [31:0]  ln [3];

  cds_top #(.NUM_ENGINES(1)) u1 (
    .clk, .rst_n, .start(1'b0), .reload(1'b0), .hz_len(len), .ir_len(len),
    .cfg_valid(cfg_valid && cfg_ready), .cfg_ready(cfg_ready1), .cfg_word(cfg_w),
    .num_options(ln[0]), .opt_valid(lv[0]), .opt_ready(lr[0]), .opt_word(lw[0]),
    .res_valid(rv[0]), .res_ready(rrdy[0]), .res_word(rw[0]), .res_last(rl[0]),
    .loaded(loaded1), .done(done1)
  );

  cds_top #(.NUM_ENGINES(2)) u2 (
    .clk, .rst_n, .start(1'b0), .reload(1'b0), .hz_len(len), .ir_len(len),
    .cfg_valid(cfg_valid && cfg_ready), .cfg_ready(cfg_ready2), .cfg_word(cfg_w),
    .num_options({ln[2], ln[1]}), .opt_valid(lv[2:1]), .opt_ready(lr[2:1]),
    .opt_word({lw[2], lw[1]}), .res_valid(rv[2:1]), .res_ready(rrdy[2:1]),
    .res_word({rw[2], rw[1]}), .res_last(rl[2:1]), .loaded(loaded2), .done(done2)
  );

  assign cfg_ready = cfg_ready1 && cfg_ready2;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  real m [NO], rc [NO], want [NO];
  int first [3] = '{0, 0, 3};
  int got [3] = '{0, 0, 0};
  int t_load = 0, t1 = 0, t2 = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < 3; l++) if (rv[l] && rrdy[l]) begin
      for (int s = 0; s < 8; s++) if (got[l] < int'(ln[l])) begin
        checks++;
        if (!close($bitstoreal(rw[l][64*s +: 64]), want[first[l] + got[l]], 1e-9)) begin
          failures++; $display("FAIL lane %0d result %0d", l, got[l]);
        end
        got[l]++;
      end
    end
    if (done1 && t1 == 0) t1 = cyc;
    if (done2 && t2 == 0) t2 = cyc;
  end
  assign rrdy = 3'b111;

  for (genvar l = 0; l < 3; l++) begin : g_src
    initial begin
      lv[l] = 0; lw[l] = '0;
      wait (rst_n);
      for (int w = 0; w < (int'(ln[l]) + 1) / 2; w++) begin
        @(negedge clk);
        lv[l] = 1;
        lw[l] = '0;
        for (int s = 0; s < 2; s++) if (2 * w + s < int'(ln[l]))
          lw[l][256*s +: 256] = opt_slot(m[first[l]+2*w+s], 4, rc[first[l]+2*w+s]);
        while (!lr[l]) @(negedge clk);
        @(posedge clk);
        @(negedge clk) lv[l] = 0;
      end
    end
  end

  initial begin
    make_curves(NCURVE, 10.0);
    len = 11'(NCURVE);
    ln[0] = NO; ln[1] = NO / 2; ln[2] = NO / 2;
    for (int i = 0; i < NO; i++) begin
      m[i] = 2.9 + 0.02 * i;                 // 12 quarterly points each
      rc[i] = 0.25 + 0.05 * i;
      want[i] = spread(m[i], 4, rc[i]);
    end
    cfg_valid = 0; cfg_w = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < n_cfg_words(); w++) begin
      @(negedge clk);
      cfg_valid = 1; cfg_w = cfg_word(w);
      while (!cfg_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk) cfg_valid = 0;
    wait (loaded1 && loaded2);
    t_load = cyc;
    wait (done1 && done2);
    repeat (3) @(posedge clk);
    for (int l = 0; l < 3; l++) begin
      checks++;
      if (got[l] != int'(ln[l])) begin failures++; $display("FAIL lane %0d got %0d", l, got[l]); end
    end
    $display("one engine: %0d cycles, two engines: %0d cycles, speed-up %.2f",
             t1 - t_load, t2 - t_load, real'(t1 - t_load) / real'(t2 - t_load));
    checks++;
    if (real'(t1 - t_load) / real'(t2 - t_load) < 1.8) begin failures++; $display("FAIL scaling"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
