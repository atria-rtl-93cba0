// tb_fpu: drives the FPU with S/A rows directly. Checks: RND registers load
// from the row and the MUX array forms F_MAC bit by bit; B-to-S path (LUT
// loaded with the thermometer code) with a 2-cycle latency; max pooling path
// with a 6-cycle latency; pop counter -> ReLU path ends 515 cycles after start (load, 512 shifts, ReLU LUT)
// with ReLU(floor(ones/2)).
module tb_fpu;
  import atria_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [ROW_BITS-1:0] sa_row;
  logic rnd_load = 0, start = 0, res_valid, pc_busy, act_valid;
  fpu_path_e path;
  logic [3:0] seg; logic [9:0] bidx; logic [6:0] len;
  logic [SEG_BITS-1:0] mac_out, res_data;
  logic [7:0] act;
  logic bts_we = 0, relu_we = 0;
  logic [7:0] bts_waddr, relu_waddr, relu_wdata;
  logic [SEG_BITS-1:0] bts_wdata;
  logic [3:0] rnd_ref [512];
  int checks = 0, failures = 0;

  fpu dut (.clk, .rst_n, .sa_row, .rnd_load, .mac_out, .start, .path, .seg, .bidx, .len,
           .res_valid, .res_data, .pc_busy, .act_valid, .act,
           .bts_we, .bts_waddr, .bts_wdata, .relu_we, .relu_waddr, .relu_wdata);
  always #1 clk = ~clk;

  function automatic logic [ROW_BITS-1:0] rrow();
    logic [ROW_BITS-1:0] r;
    for (int i = 0; i < 16; i++) r[512*i +: 512] = rand512();
    return r;
  endfunction

  task automatic go(input fpu_path_e p, output int cyc);
    @(negedge clk); path = p; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!(res_valid || act_valid) && cyc < 1000) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    sa_row = '0; path = PATH_BTOS; seg = '0; bidx = '0; len = 7'd1;
    bts_waddr = '0; bts_wdata = '0; relu_waddr = '0; relu_wdata = '0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // LUT loading
    for (int e = 0; e < 256; e++) begin
      @(negedge clk);
      bts_we = 1; bts_waddr = 8'(e); bts_wdata = therm(8'(e));
      relu_we = 1; relu_waddr = 8'(e); relu_wdata = relu(8'(e));
    end
    @(negedge clk); bts_we = 0; relu_we = 0;
    // RND from a row
    sa_row = rrow();
    for (int j = 0; j < 512; j++) rnd_ref[j] = {sa_row[1536+j], sa_row[1024+j], sa_row[512+j], sa_row[j]};
    @(negedge clk) rnd_load = 1;
    @(negedge clk) rnd_load = 0;
    // MUX array
    for (int t = 0; t < 10; t++) begin
      sa_row = rrow(); @(posedge clk);
      for (int j = 0; j < 512; j++) begin
        checks++;
        if (mac_out[j] !== sa_row[512*rnd_ref[j] + j]) failures++;
      end
      @(negedge clk);
    end
    // B-to-S path
    for (int t = 0; t < 20; t++) begin
      sa_row = rrow(); bidx = 10'($urandom);
      go(PATH_BTOS, cyc);
      checks += 2;
      if (cyc != 2) begin failures++; $display("btos latency %0d", cyc); end
      if (res_data !== therm(sa_row[8*bidx +: 8])) failures++;
    end
    // Max pooling path
    for (int t = 0; t < 20; t++) begin
      logic [7:0] e;
      sa_row = rrow(); seg = 4'($urandom); len = 7'($urandom_range(64, 1));
      e = 0;
      for (int i = 0; i < int'(len); i++) if (sa_row[512*seg + 8*i +: 8] > e) e = sa_row[512*seg + 8*i +: 8];
      go(PATH_MAXP, cyc);
      checks += 2;
      if (cyc != 6) begin failures++; $display("maxpool latency %0d", cyc); end
      if (res_data[7:0] !== e) failures++;
    end
    // Pop counter -> ReLU path
    for (int t = 0; t < 4; t++) begin
      int n; logic [7:0] c;
      sa_row = rrow(); seg = 4'($urandom);
      if (t == 1) sa_row[512*seg +: 512] = therm(8'd200);
      if (t == 2) sa_row[512*seg +: 512] = therm(8'd20);
      n = ones512(sa_row[512*seg +: 512]) / 2; c = (n > 255) ? 8'd255 : 8'(n);
      go(PATH_POPC, cyc);
      checks += 2;
      if (cyc != 515) begin failures++; $display("popc latency %0d", cyc); end
      if (act !== relu(c)) begin failures++; $display("act %0d exp %0d", act, relu(c)); end
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
