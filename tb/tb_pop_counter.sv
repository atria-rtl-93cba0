// tb_pop_counter: converts random, all-zero and all-one 512-bit vectors and
// checks the result (floor(ones/2), saturated at 255) and the conversion time
// of one load cycle plus 512 shift cycles (256 ns at 2 GHz), 513 from start
// to done.
module tb_pop_counter;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1, start = 0, busy, done;
  logic [511:0] din;
  logic [7:0] count;
  int checks = 0, failures = 0;

  pop_counter #(.W(512), .CNT_W(8)) dut (.clk, .rst_n, .start, .din, .busy, .done, .count);
  always #1 clk = ~clk;

  task automatic conv(input logic [511:0] v);
    int cyc, exp;
    exp = ones512(v) / 2;
    if (exp > 255) exp = 255;
    @(negedge clk); din = v; start = 1;
    @(negedge clk); start = 0; din = ~v;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 513) begin failures++; $display("latency %0d != 513", cyc); end
    checks++;
    if (count !== 8'(exp)) begin failures++; $display("count %0d expected %0d", count, exp); end
    @(negedge clk);
    checks++;
    if (busy || done) failures++;
  endtask

  initial begin
    din = '0;
    @(negedge clk) rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    conv('0);
    conv('1);
    conv({511'b0, 1'b1});
    for (int t = 0; t < 20; t++) begin
      logic [511:0] v; v = rand512();
      if (t % 3 == 0) v = v & rand512();
      conv(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
