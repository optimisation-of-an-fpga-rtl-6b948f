// tb_rate_loader: loads a 10-point hazard curve and a 7-point interest curve (neither a
// multiple of four pairs per word) from 512-bit words with random gaps, records every
// RAM write and checks address, data and curve selection, that `loaded` rises only
// after the last pair, that extra words are refused afterwards, and that the load takes
// one pair per cycle.
module tb_rate_loader;
  import cds_pkg::*;
  import cds_ref_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0, start = 0;
  logic [6:0] hz_len, ir_len;
  logic in_valid, in_ready;
  logic [511:0] in_word;
  logic hz_we, ir_we, loaded;
  logic [5:0] waddr;
  rate_pt_t wdata;
  int checks = 0, failures = 0;
  int nhz = 0, nir = 0, cyc = 0, c_first = -1, c_done = -1;

  rate_loader #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (hz_we || ir_we) begin
      checks++;
      if (c_first < 0) c_first = cyc;
      if (hz_we && ir_we) begin failures++; $display("FAIL both write enables"); end
      if (hz_we) begin
        if (waddr != 6'(nhz) || wdata != {$realtobits(hz_t[nhz]), $realtobits(hz_v[nhz])}) begin
          failures++; $display("FAIL hazard write %0d", nhz);
        end
        nhz++;
      end else begin
        if (nhz != 10 || waddr != 6'(nir) || wdata != {$realtobits(ir_t[nir]), $realtobits(ir_v[nir])}) begin
          failures++; $display("FAIL interest write %0d", nir);
        end
        nir++;
      end
    end
    if (loaded && c_done < 0) c_done = cyc;
  end

  initial begin
    make_curves(10, 5.0);
    ir_n = 7;
    hz_len = 10; ir_len = 7;
    in_valid = 0; in_word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < n_cfg_words(); w++) begin
      @(negedge clk);
      in_valid = 1; in_word = cfg_word(w);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk) in_valid = 0;
    end
    @(negedge clk);
    in_valid = 1; in_word = '1;               // an extra word must not be taken
    repeat (20) @(posedge clk);
    checks++;
    if (!loaded || nhz != 10 || nir != 7) begin
      failures++; $display("FAIL loaded=%0d hz=%0d ir=%0d", loaded, nhz, nir);
    end
    checks++;
    if (in_ready) begin failures++; $display("FAIL accepts after load"); end
    checks++;
    // 17 pairs, one per cycle, plus one cycle per word to take it
    if (c_done - c_first > 17 + 5 + 2) begin failures++; $display("FAIL load took %0d cycles", c_done - c_first); end
    // start re-arms the loader
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (loaded) begin failures++; $display("FAIL start did not re-arm"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
