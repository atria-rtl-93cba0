// tb_bts_lut: fills all 256 entries of the bts lookup table with reference
// data, reads them back in random order and checks the data and the two-cycle
// read latency (1 ns at 2 GHz).
module tb_bts_lut;
  logic clk = 0, rst_n = 1, we = 0, re = 0, rvalid;
  logic [7:0] waddr, raddr;
  logic [512-1:0] wdata, rdata;
  logic [512-1:0] ref_mem [256];
  int checks = 0, failures = 0;

  bts_lut #(.ENTRIES(256), .W(512)) dut (.clk, .rst_n, .we, .waddr, .wdata, .re, .raddr, .rvalid, .rdata);
  always #1 clk = ~clk;

  initial begin
    waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 256; e++) begin
      ref_mem[e] = tb_util_pkg::rand512();
      @(negedge clk); we = 1; waddr = 8'(e); wdata = ref_mem[e];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 300; t++) begin
      int cyc;
      raddr = 8'($urandom); re = 1;
      @(negedge clk); re = 0;
      cyc = 1;
      while (!rvalid && cyc < 10) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 2) begin failures++; $display("latency %0d", cyc); end
      checks++;
      if (rdata !== ref_mem[raddr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
