// tb_rnd_regs: checks that the 512 RND registers reset to zero, load all
// select values in one cycle (bit b of register j from source bit 512*b + j),
// and hold them while load is low.
module tb_rnd_regs;
  localparam int N = 512;
  logic clk = 0, rst_n = 1, load = 0;
  logic [N*4-1:0] d, dprev;
  logic [3:0][N-1:0] rnd;
  int checks = 0, failures = 0;

  rnd_regs #(.N_MUX(N), .RND_W(4)) dut (.clk, .rst_n, .load, .load_data(d), .rnd);
  always #1 clk = ~clk;

  task automatic cmp(input logic [N*4-1:0] exp);
    for (int j = 0; j < N; j++) begin
      checks++;
      for (int b = 0; b < 4; b++)
        if (rnd[b][j] !== exp[N*b + j]) begin
          failures++;
          if (failures < 5) $display("mismatch reg %0d bit %0d", j, b);
        end
    end
  endtask

  initial begin
    d = '0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(posedge clk);
    cmp('0);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < N*4/32; i++) d[32*i +: 32] = $urandom;
      @(negedge clk) load = 1;
      @(negedge clk) load = 0;
      dprev = d;
      cmp(dprev);
      d = ~d;                      // must not load while load is low
      repeat (3) @(negedge clk);
      cmp(dprev);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
