// tb_chip_ctrl: chip controller with 4 stand-in banks. Checks that ordinary
// µ-operations are forwarded to exactly the banks of the mask once they are
// ready, that responses are passed to the host, and that OP_MOVE issues a
// READ_SEG to the single source PE, keeps the answer (not shown to the host)
// and then sends WRITE_SEG with that data to the destination PEs.
module tb_chip_ctrl;
  import atria_pkg::*;
  import tb_util_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 1, in_valid = 0, in_ready, rsp_valid;
  chip_uop_t in;
  logic [SEG_BITS-1:0] rsp_data;
  logic [NB-1:0] bank_valid, bank_ready, bank_rsp_valid;
  bank_cmd_t bank_cmd;
  logic [SEG_BITS-1:0] bank_rsp_data [NB];
  logic [31:0] n_move;
  int checks = 0, failures = 0;
  int host_rsp = 0;

  chip_ctrl #(.N_BANKS(NB)) dut (.clk, .rst_n, .in_valid, .in, .in_ready, .rsp_valid, .rsp_data,
    .bank_valid, .bank_cmd, .bank_ready, .bank_rsp_valid, .bank_rsp_data, .n_move);
  always #1 clk = ~clk;
  always @(posedge clk) if (rst_n && rsp_valid) host_rsp++;

  task automatic issue(input chip_uop_t u);
    @(negedge clk); in = u; in_valid = 1;
    @(negedge clk); in_valid = 0;
  endtask

  task automatic wait_bank(output logic [NB-1:0] v, output bank_cmd_t c);
    int n; n = 0;
    while (bank_valid == 0 && n < 50) begin @(negedge clk); n++; end
    v = bank_valid; c = bank_cmd;
  endtask

  initial begin
    chip_uop_t u;
    logic [NB-1:0] v;
    bank_cmd_t c;
    logic [511:0] d;
    bank_ready = '1; bank_rsp_valid = '0; in = '0;
    for (int b = 0; b < NB; b++) bank_rsp_data[b] = '0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // forwarding, with a busy bank
    for (int t = 0; t < 20; t++) begin
      u = '0; u.bank_mask = 8'(NB'($urandom) | NB'(1)); u.bcmd.sa_mask = 64'($urandom);
      u.bcmd.cmd.op = OP_WRITE_SEG; u.bcmd.cmd.data = rand512();
      bank_ready = ~u.bank_mask[NB-1:0];
      issue(u);
      repeat (3) begin checks++; if (bank_valid != 0) failures++; @(negedge clk); end
      bank_ready = '1;
      wait_bank(v, c);
      checks += 2;
      if (v !== u.bank_mask[NB-1:0]) failures++;
      if (c !== u.bcmd) failures++;
    end
    // response pass-through
    d = rand512(); bank_rsp_data[2] = d; bank_rsp_valid = 4'b0100;
    @(negedge clk); bank_rsp_valid = '0; bank_rsp_data[2] = '0;
    checks += 2; if (!rsp_valid) failures++; if (rsp_data !== d) failures++;
    @(negedge clk);
    // move: source bank 3 / subarray 5 -> banks 0,1 subarrays 1,2
    host_rsp = 0;
    u = '0; u.bank_mask = 8'b0011; u.src_bank = 3'd3; u.src_sa = 6'd5;
    u.bcmd.sa_mask = 64'b110; u.bcmd.cmd.op = OP_MOVE;
    u.bcmd.cmd.row_a = 8'd7; u.bcmd.cmd.seg_a = 4'd2; u.bcmd.cmd.row_d = 8'd9; u.bcmd.cmd.seg_d = 4'd11;
    issue(u);
    wait_bank(v, c);
    checks += 4;
    if (v !== 4'b1000) failures++;
    if (c.cmd.op != OP_READ_SEG) failures++;
    if (c.sa_mask !== 64'd1 << 5) failures++;
    if (c.cmd.row_a != 8'd7 || c.cmd.seg_a != 4'd2) failures++;
    repeat (3) @(negedge clk);
    d = rand512(); bank_rsp_data[3] = d; bank_rsp_valid = 4'b1000;
    @(negedge clk); bank_rsp_valid = '0;
    wait_bank(v, c);
    checks += 5;
    if (v !== 4'b0011) failures++;
    if (c.cmd.op != OP_WRITE_SEG) failures++;
    if (c.sa_mask !== 64'b110) failures++;
    if (c.cmd.data !== d || c.cmd.row_d != 8'd9 || c.cmd.seg_d != 4'd11) failures++;
    if (host_rsp != 0) failures++;
    @(negedge clk);
    checks++; if (n_move != 1) failures++;
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
