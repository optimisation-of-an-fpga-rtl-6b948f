// tb_rate_ram: writes random (time, rate) pairs into the curve store and reads them back
// through both read ports at random addresses, checking each value one cycle after its
// address was presented.
module tb_rate_ram;
  import cds_pkg::*;
  localparam int DEPTH = 1024;
  logic clk = 0;
  logic we;
  logic [9:0] waddr;
  rate_pt_t wdata;
  logic [9:0] rd_addr [2];
  rate_pt_t rd_data [2];
  rate_pt_t model [DEPTH];
  int checks = 0, failures = 0;

  rate_ram #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [9:0] a0, a1;
    we = 0; waddr = 0; wdata = '0; rd_addr = '{default: '0};
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 10'(i);
      wdata = '{t: {$urandom, $urandom}, v: {$urandom, $urandom}};
      model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 2000; i++) begin
      a0 = 10'($urandom); a1 = 10'($urandom);
      rd_addr[0] = a0; rd_addr[1] = a1;
      @(posedge clk); #1;
      checks += 2;
      if (rd_data[0] != model[a0]) begin failures++; $display("FAIL port0 addr %0d", a0); end
      if (rd_data[1] != model[a1]) begin failures++; $display("FAIL port1 addr %0d", a1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
