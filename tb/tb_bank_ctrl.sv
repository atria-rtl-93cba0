// tb_bank_ctrl: bank controller with 8 stand-in subarray controllers. Checks
// that a command is held until every selected subarray is ready, is then
// multicast in one cycle to exactly the masked subarrays with the command
// unchanged, that in_ready drops while a command is held, and that read
// responses are merged and delayed by one cycle.
module tb_bank_ctrl;
  import atria_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 1, in_valid = 0, in_ready, rsp_valid, idle;
  bank_cmd_t in;
  logic [SEG_BITS-1:0] rsp_data;
  logic [N-1:0] pe_valid, pe_ready, pe_rsp_valid;
  pe_cmd_t pe_cmd;
  logic [SEG_BITS-1:0] pe_rsp_data [N];
  int checks = 0, failures = 0;

  bank_ctrl #(.N_SUB(N)) dut (.clk, .rst_n, .in_valid, .in, .in_ready, .rsp_valid, .rsp_data, .idle,
    .pe_valid, .pe_cmd, .pe_ready, .pe_rsp_valid, .pe_rsp_data);
  always #1 clk = ~clk;

  initial begin
    pe_ready = '1; pe_rsp_valid = '0; in = '0;
    for (int s = 0; s < N; s++) pe_rsp_data[s] = rand512();
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      logic [N-1:0] mask, busy;
      int wait_c;
      mask = N'($urandom) | N'(1);
      busy = (N'($urandom) & mask) | N'(1);
      in = '0; in.sa_mask = 64'(mask); in.cmd.op = OP_FMAC; in.cmd.row_a = 8'($urandom); in.cmd.data = rand512();
      pe_ready = ~busy;
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (in_ready) failures++;          // held
      wait_c = $urandom_range(4, 1);
      repeat (wait_c) begin
        @(negedge clk);
        checks++; if (pe_valid != 0 && busy != 0) failures++;
      end
      pe_ready = '1;
      @(negedge clk);
      checks += 2;
      if (pe_valid !== mask) begin failures++; $display("mask %b vs %b", pe_valid, mask); end
      if (pe_cmd !== in.cmd) failures++;
      @(negedge clk);
      checks++; if (pe_valid !== '0 || !in_ready || !idle) failures++;
    end
    // responses
    for (int s = 0; s < N; s++) begin
      pe_rsp_valid = N'(1) << s;
      @(negedge clk); pe_rsp_valid = '0;
      checks += 2;
      if (!rsp_valid) failures++;
      if (rsp_data !== pe_rsp_data[s]) failures++;
    end
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
