// tb_result_packer: packs eleven spread values into 512-bit words under random input
// gaps and output back-pressure, and checks that a full word of eight comes first
// (not marked last), then a word with the remaining three and zero padding marked
// last, and that `done` follows the last word.
module tb_result_packer;
  import cds_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] num_options;
  logic in_valid, in_ready, out_valid, out_ready, out_last, done;
  f64_t in_spread;
  logic [511:0] out_word;
  int checks = 0, failures = 0, nw = 0;
  f64_t vals [11];

  result_packer dut (.*);
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
      for (int s = 0; s < 8; s++) begin
        int i;
        i = 8 * nw + s;
        checks++;
        if (out_word[64*s +: 64] != ((i < 11) ? vals[i] : 64'd0)) begin
          failures++; $display("FAIL word %0d slot %0d", nw, s);
        end
      end
      checks++;
      if (out_last != (nw == 1)) begin failures++; $display("FAIL last flag on word %0d", nw); end
      nw++;
    end
    out_ready <= $urandom_range(0, 1);
  end

  initial begin
    for (int i = 0; i < 11; i++) vals[i] = $realtobits(10.0 * i + 0.5);
    num_options = 11;
    in_valid = 0; in_spread = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 11; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      in_valid = 1; in_spread = vals[i];
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    repeat (20) @(posedge clk);
    checks++;
    if (nw != 2 || !done) begin failures++; $display("FAIL words=%0d done=%0d", nw, done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
