// tb_atria_bank: one bank at reduced size (2 PEs, 32 rows, T_MOC = 4).
// Multicasts LUT, RND and operand writes to both PEs, runs an F_MAC in both
// PEs at once, then reads each result back through the bank controller and
// compares it with AND + 16:1 selection computed here. Also checks that a
// write addressed to PE 1 only leaves PE 0 unchanged.
module tb_atria_bank;
  import atria_pkg::*;
  import tb_util_pkg::*;
  localparam int NS = 2;
  logic clk = 0, rst_n = 1, in_valid = 0, in_ready, rsp_valid, idle;
  bank_cmd_t in;
  logic [SEG_BITS-1:0] rsp_data, got;
  logic [ROW_BITS-1:0] ra, rb, rr;
  logic [3:0] rnd_ref [512];
  int checks = 0, failures = 0;

  atria_bank #(.N_SUB(NS), .ROWS(32), .T_MOC(4)) dut (
    .clk, .rst_n, .in_valid, .in, .in_ready, .rsp_valid, .rsp_data, .idle);
  always #1 clk = ~clk;

  task automatic run(input bank_cmd_t c);
    @(negedge clk); in = c; in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(negedge clk); in_valid = 0;
    while (!idle) @(negedge clk);
  endtask

  function automatic bank_cmd_t mk(input op_e op, input logic [63:0] sm);
    bank_cmd_t c;
    c = '0; c.sa_mask = sm; c.cmd.op = op;
    return c;
  endfunction

  task automatic wr(input logic [63:0] sm, input int r, input int s, input logic [511:0] d);
    bank_cmd_t c;
    c = mk(OP_WRITE_SEG, sm); c.cmd.row_d = 8'(r); c.cmd.seg_d = 4'(s); c.cmd.data = d; run(c);
  endtask

  task automatic rd(input int pe, input int r, input int s, output logic [511:0] d);
    bank_cmd_t c;
    c = mk(OP_READ_SEG, 64'(1) << pe); c.cmd.row_a = 8'(r); c.cmd.seg_a = 4'(s);
    fork
      run(c);
      begin @(posedge clk iff rsp_valid); d = rsp_data; end
    join
  endtask

  initial begin
    bank_cmd_t c;
    logic [511:0] e;
    in = '0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    while (!idle) @(negedge clk);
    for (int s = 0; s < 16; s++) begin
      ra[512*s +: 512] = rand512(); rb[512*s +: 512] = rand512(); rr[512*s +: 512] = rand512();
      wr('1, 4, s, ra[512*s +: 512]);
      wr('1, 5, s, rb[512*s +: 512]);
    end
    for (int s = 0; s < 4; s++) wr('1, 20, s, rr[512*s +: 512]);
    for (int j = 0; j < 512; j++) rnd_ref[j] = {rr[1536+j], rr[1024+j], rr[512+j], rr[j]};
    c = mk(OP_LOAD_RND, '1); c.cmd.row_a = 8'd20; run(c);
    c = mk(OP_FMAC, '1); c.cmd.row_a = 8'd4; c.cmd.row_b = 8'd5; c.cmd.row_d = 8'd8;
    c.cmd.seg_d = 4'd2; c.cmd.len = 7'd1; run(c);
    for (int j = 0; j < 512; j++) e[j] = ra[512*rnd_ref[j] + j] & rb[512*rnd_ref[j] + j];
    for (int p = 0; p < NS; p++) begin
      rd(p, 8, 2, got);
      checks++;
      if (got !== e) begin failures++; $display("fmac mismatch in PE %0d", p); end
    end
    // unicast write to PE 1 only
    wr(64'b10, 4, 0, ~ra[511:0]);
    rd(0, 4, 0, got); checks++; if (got !== ra[511:0]) failures++;
    rd(1, 4, 0, got); checks++; if (got !== ~ra[511:0]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
