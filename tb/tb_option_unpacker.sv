// tb_option_unpacker: sends five options in three 512-bit words (the last word has an
// unused slot filled with junk) under random output back-pressure, and checks the
// option stream: order, field values, that only five options leave, that nothing leaves
// while `enable` is low, and the rate of one option per cycle from a held word.
module tb_option_unpacker;
  import cds_pkg::*;
  import cds_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, enable = 0;
  logic [31:0] num_options;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [511:0] in_word;
  option_t out_opt;
  int checks = 0, failures = 0, n_out = 0;
  real m [6];
  int  f [6];
  real rc [6];

  option_unpacker dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (n_out >= 5 || out_opt.maturity != $realtobits(m[n_out]) ||
          out_opt.frequency != 32'(f[n_out]) || out_opt.recovery != $realtobits(rc[n_out])) begin
        failures++; $display("FAIL option %0d: m=%g f=%0d", n_out, $bitstoreal(out_opt.maturity), out_opt.frequency);
      end
      n_out++;
    end
    out_ready <= $urandom_range(0, 1);
  end

  initial begin
    for (int i = 0; i < 6; i++) begin
      m[i] = 0.5 * (i + 1); f[i] = i + 1; rc[i] = 0.1 * (i + 1);
    end
    num_options = 5;
    in_valid = 0; in_word = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in_valid = 1;
    in_word = {opt_slot(m[1], f[1], rc[1]), opt_slot(m[0], f[0], rc[0])};
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != 0 || in_ready) begin failures++; $display("FAIL moved while disabled"); end
    @(negedge clk);
    in_valid = 0;
    enable = 1;
    for (int w = 0; w < 3; w++) begin
      @(negedge clk);
      in_valid = 1;
      in_word = {opt_slot(m[2*w+1], f[2*w+1], rc[2*w+1]), opt_slot(m[2*w], f[2*w], rc[2*w])};
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    repeat (30) @(posedge clk);
    checks++;
    if (n_out != 5) begin failures++; $display("FAIL %0d options out", n_out); end
    checks++;
    if (in_ready) begin failures++; $display("FAIL still asking for words"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
