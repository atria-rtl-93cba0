// tb_maxpool: random segments and window lengths; checks the maximum of the
// first len bytes and the 6-cycle pipeline latency, with back-to-back starts.
module tb_maxpool;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1, start = 0, valid;
  logic [511:0] vec;
  logic [6:0] len;
  logic [7:0] mx;
  int checks = 0, failures = 0;
  logic [7:0] expq [$];
  int issued = 0, seen = 0, cyc = 0;
  int start_cyc [$];

  maxpool #(.N_BYTES(64)) dut (.clk, .rst_n, .start, .vec, .len, .valid, .max(mx));
  always #1 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && valid) begin
    checks += 2;
    seen++;
    if (mx !== expq.pop_front()) failures++;
    if (cyc - start_cyc.pop_front() != 6) failures++;
  end

  initial begin
    vec = '0; len = 7'd1;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic [7:0] e;
      @(negedge clk);
      vec = rand512();
      len = 7'($urandom_range(64, 1));
      e = 0;
      for (int i = 0; i < int'(len); i++) if (vec[8*i +: 8] > e) e = vec[8*i +: 8];
      expq.push_back(e);
      start_cyc.push_back(cyc);
      start = (t % 5 != 4);
      if (!start) begin void'(expq.pop_back()); void'(start_cyc.pop_back()); end
      else issued++;
    end
    @(negedge clk) start = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (seen != issued) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
