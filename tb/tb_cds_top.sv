// tb_cds_top: end-to-end test of the multi-engine accelerator at its default size (five
// engines, six hazard and six interpolation units per bank, 1024-entry curves).
//
// It loads a 1024-point hazard curve and a 1024-point interest-rate curve (one
// broadcast stream of 512 words), gives each engine its own chunk of options (1, 2, 3,
// 4 and 9 options), holds the result streams back at random, and compares every spread
// with the reference model of cds_ref_pkg (relative tolerance 1e-9). The options are
// chosen so that each mechanism of the design is exercised, and the test counts how
// often each happened, failing for any that never did: several options streaming
// through one engine back to back, all six hazard units and all six interpolation
// units busy at once, accumulation groups that are not a multiple of seven, short final
// periods, time points before the start of the interest curve and after the end of the
// hazard curve, back-pressure on the results, full and partial result words.
module tb_cds_top;
  import cds_pkg::*;
  import cds_ref_pkg::*;

  localparam int NE = 5;
  localparam int NR = 6;
  localparam int NCURVE = 1024;
  localparam real SPAN = 10.0;

  logic clk = 0, rst_n = 0, start = 0, reload = 0;
  logic [10:0] hz_len, ir_len;
  logic cfg_valid, cfg_ready;
  logic [511:0] cfg_word_s;
  logic [NE-1:0][31:0] num_options;
  logic [NE-1:0] opt_valid, opt_ready, res_valid, res_ready, res_last;
  logic [NE-1:0][511:0] opt_word, res_word;
  logic loaded, done;

  cds_top dut (
    .clk, .rst_n, .start, .reload, .hz_len, .ir_len,
    .cfg_valid, .cfg_ready, .cfg_word(cfg_word_s),
    .num_options, .opt_valid, .opt_ready, .opt_word,
    .res_valid, .res_ready, .res_word, .res_last, .loaded, .done
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  real om [NE][16];
  int  of [NE][16];
  real orc [NE][16];
  real want [NE][16];
  int  nopt [NE] = '{1, 2, 3, 4, 9};
  int  got_n [NE];

  // mechanism counters
  int c_interopt = 0, c_allhz = 0, c_allip = 0, c_stall = 0, c_partial = 0, c_fullword = 0;
  int c_short = 0, c_rem7 = 0, c_ir_before = 0, c_hz_after = 0, c_bcast = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Observation of engine 4, which has the longest chunk of options.
  always @(posedge clk) if (rst_n) begin
    if (dut.g_eng[4].u_eng.u_tp.in_valid && dut.g_eng[4].u_eng.u_tp.in_ready &&
        dut.g_eng[4].u_eng.u_hazard.g_unit[0].u_hz.state != 0) c_interopt++;
    if (dut.g_eng[4].u_eng.u_hazard.g_unit[0].u_hz.state == 1 &&
        dut.g_eng[4].u_eng.u_hazard.g_unit[1].u_hz.state == 1 &&
        dut.g_eng[4].u_eng.u_hazard.g_unit[2].u_hz.state == 1 &&
        dut.g_eng[4].u_eng.u_hazard.g_unit[3].u_hz.state == 1 &&
        dut.g_eng[4].u_eng.u_hazard.g_unit[4].u_hz.state == 1 &&
        dut.g_eng[4].u_eng.u_hazard.g_unit[5].u_hz.state == 1) c_allhz++;
    if (dut.g_eng[4].u_eng.u_pay.u_interp.g_unit[0].u_ip.state != 0 &&
        dut.g_eng[4].u_eng.u_pay.u_interp.g_unit[1].u_ip.state != 0 &&
        dut.g_eng[4].u_eng.u_pay.u_interp.g_unit[2].u_ip.state != 0 &&
        dut.g_eng[4].u_eng.u_pay.u_interp.g_unit[3].u_ip.state != 0 &&
        dut.g_eng[4].u_eng.u_pay.u_interp.g_unit[4].u_ip.state != 0 &&
        dut.g_eng[4].u_eng.u_pay.u_interp.g_unit[5].u_ip.state != 0) c_allip++;
    if (cfg_valid && cfg_ready) c_bcast++;
    for (int e = 0; e < NE; e++) if (res_valid[e] && !res_ready[e]) c_stall++;
  end

  // Result streams: random back-pressure, check every slot.
  always @(posedge clk) begin
    if (!rst_n) begin
      res_ready <= '0;
    end else begin
      for (int e = 0; e < NE; e++) begin
        if (res_valid[e] && res_ready[e]) begin
          for (int s = 0; s < 8; s++) begin
            if (got_n[e] < nopt[e]) begin
              real g;
              g = $bitstoreal(res_word[e][64*s +: 64]);
              checks++;
              if (!close(g, want[e][got_n[e]], 1e-9)) begin
                failures++;
                $display("FAIL engine %0d option %0d: spread %.12f want %.12f",
                         e, got_n[e], g, want[e][got_n[e]]);
              end
              got_n[e]++;
            end
          end
          if (res_last[e]) begin
            checks++;
            if (got_n[e] != nopt[e]) begin failures++; $display("FAIL engine %0d early last", e); end
            if (nopt[e] % 8 != 0) c_partial++;
          end else c_fullword++;
        end
        res_ready[e] <= ($urandom_range(0, 2) != 0);
      end
    end
  end

  // Option streams, one per engine.
  for (genvar e = 0; e < NE; e++) begin : g_src
    initial begin
      opt_valid[e] = 0;
      opt_word[e] = '0;
      wait (rst_n);
      for (int w = 0; w < (nopt[e] + 1) / 2; w++) begin
        @(negedge clk);
        opt_valid[e] = 1;
        opt_word[e] = '0;
        for (int s = 0; s < 2; s++)
          if (2 * w + s < nopt[e])
            opt_word[e][256*s +: 256] = opt_slot(om[e][2*w+s], of[e][2*w+s], orc[e][2*w+s]);
        while (!opt_ready[e]) @(negedge clk);
        @(posedge clk);
        @(negedge clk) opt_valid[e] = 0;
      end
    end
  end

  initial begin
    int fr [4] = '{1, 2, 4, 12};
    int np;
    make_curves(NCURVE, SPAN);
    hz_len = 11'(NCURVE); ir_len = 11'(NCURVE);
    cfg_valid = 0; cfg_word_s = '0;
    for (int e = 0; e < NE; e++) begin
      num_options[e] = 32'(nopt[e]);
      got_n[e] = 0;
      for (int i = 0; i < nopt[e]; i++) begin
        om[e][i]  = real'($urandom_range(25, 1200)) / 100.0;
        of[e][i]  = fr[$urandom_range(0, 2)];
        orc[e][i] = real'($urandom_range(20, 60)) / 100.0;
      end
    end
    // fixed cases: short option before the interest curve, long option past the hazard curve
    om[4][0] = 0.3;   of[4][0] = 4;  orc[4][0] = 0.4;
    om[4][1] = 11.25; of[4][1] = 2;  orc[4][1] = 0.35;
    om[3][0] = 1.0;   of[3][0] = 12; orc[3][0] = 0.5;
    for (int e = 0; e < NE; e++)
      for (int i = 0; i < nopt[e]; i++) begin
        want[e][i] = spread(om[e][i], of[e][i], orc[e][i]);
        np = n_points(om[e][i], of[e][i]);
        if (np % 7 != 0) c_rem7++;
        if (real'(np) != om[e][i] * real'(of[e][i])) c_short++;
        if (1.0 / real'(of[e][i]) < ir_t[0]) c_ir_before++;
        if (om[e][i] > hz_t[NCURVE-1]) c_hz_after++;
      end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int w = 0; w < n_cfg_words(); w++) begin
      @(negedge clk);
      cfg_valid = 1;
      cfg_word_s = cfg_word(w);
      while (!cfg_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk) cfg_valid = 0;
    wait (loaded);
    checks++;
    if (c_bcast != n_cfg_words()) begin failures++; $display("FAIL broadcast count %0d", c_bcast); end

    wait (done);
    repeat (5) @(posedge clk);
    for (int e = 0; e < NE; e++) begin
      checks++;
      if (got_n[e] != nopt[e]) begin failures++; $display("FAIL engine %0d got %0d results", e, got_n[e]); end
    end
    $display("mechanisms: back-to-back options %0d, all hazard units busy %0d cycles, all interpolations busy %0d cycles,",
             c_interopt, c_allhz, c_allip);
    $display("  groups not a multiple of 7: %0d, short final periods %0d, before interest curve %0d, past hazard curve %0d,",
             c_rem7, c_short, c_ir_before, c_hz_after);
    $display("  result stalls %0d, full words %0d, partial words %0d, broadcast words %0d, cycles %0d",
             c_stall, c_fullword, c_partial, c_bcast, cycle);
    if (c_interopt == 0 || c_allhz == 0 || c_allip == 0 || c_rem7 == 0 || c_short == 0 ||
        c_ir_before == 0 || c_hz_after == 0 || c_stall == 0 || c_fullword == 0 || c_partial == 0)
    begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
