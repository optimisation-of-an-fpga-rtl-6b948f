// tb_cds_engine: one engine at reduced size (three units per bank, 64-entry curve
// memories holding 50-point curves) pricing seven options sent as four 512-bit words,
// with random back-pressure on the result words. Checks every spread against the
// reference model (relative tolerance 1e-9), the result word layout (eight per word,
// last word partial and marked), `loaded` and `done`, and that the second batch after a
// new `start` (without reloading the curves) prices correctly too.
module tb_cds_engine;
  import cds_pkg::*;
  import cds_ref_pkg::*;
  localparam int DEPTH = 64;
  localparam int LEN = 50;
  localparam int NO = 7;
  logic clk = 0, rst_n = 0, start = 0, reload = 0;
  logic [6:0] hz_len, ir_len;
  logic [31:0] num_options;
  logic cfg_valid, cfg_ready, opt_valid, opt_ready, res_valid, res_ready, res_last, loaded, done;
  logic [511:0] cfg_word_s, opt_word, res_word;
  int checks = 0, failures = 0, got = 0, cyc = 0;
  real m [NO], rc [NO], want [NO];
  int  f [NO];

  cds_engine #(.NREP(3), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .start, .reload, .hz_len, .ir_len, .num_options,
    .cfg_valid, .cfg_ready, .cfg_word(cfg_word_s), .opt_valid, .opt_ready, .opt_word,
    .res_valid, .res_ready, .res_word, .res_last, .loaded, .done
  );
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (res_valid && res_ready) begin
      for (int s = 0; s < 8; s++) begin
        checks++;
        if (got < NO) begin
          if (!close($bitstoreal(res_word[64*s +: 64]), want[got], 1e-9)) begin
            failures++;
            $display("FAIL option %0d: %.12f want %.12f", got, $bitstoreal(res_word[64*s +: 64]), want[got]);
          end
          got++;
        end else if (res_word[64*s +: 64] != 64'd0) begin
          failures++; $display("FAIL padding slot %0d", s);
        end
      end
      checks++;
      if (res_last != (got == NO)) begin failures++; $display("FAIL last flag"); end
    end
    res_ready <= $urandom_range(0, 1);
  end

  task automatic send_options();
    for (int w = 0; w < (NO + 1) / 2; w++) begin
      @(negedge clk);
      opt_valid = 1;
      opt_word = '0;
      for (int s = 0; s < 2; s++)
        if (2 * w + s < NO) opt_word[256*s +: 256] = opt_slot(m[2*w+s], f[2*w+s], rc[2*w+s]);
      while (!opt_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk) opt_valid = 0;
    end
  endtask

  initial begin
    int fr [3] = '{1, 2, 4};
    make_curves(LEN, 5.0);
    hz_len = LEN; ir_len = LEN; num_options = NO;
    cfg_valid = 0; cfg_word_s = '0; opt_valid = 0; opt_word = '0;
    for (int i = 0; i < NO; i++) begin
      m[i] = real'($urandom_range(20, 700)) / 100.0;
      f[i] = fr[$urandom_range(0, 2)];
      rc[i] = real'($urandom_range(10, 70)) / 100.0;
      want[i] = spread(m[i], f[i], rc[i]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      send_options();                        // offered early: must wait for the curves
      for (int w = 0; w < n_cfg_words(); w++) begin
        @(negedge clk);
        cfg_valid = 1; cfg_word_s = cfg_word(w);
        while (!cfg_ready) @(negedge clk);
        @(posedge clk);
        @(negedge clk) cfg_valid = 0;
      end
    join
    wait (done);
    checks++;
    if (got != NO || !loaded) begin failures++; $display("FAIL got %0d results", got); end
    // second batch on the same curves
    for (int i = 0; i < NO; i++) begin
      m[i] = real'($urandom_range(20, 700)) / 100.0;
      want[i] = spread(m[i], f[i], rc[i]);
    end
    got = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (!loaded) begin failures++; $display("FAIL start lost curves"); end
    hz_len = LEN;
    send_options();
    wait (done);
    checks++;
    if (got != NO) begin failures++; $display("FAIL second batch got %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
