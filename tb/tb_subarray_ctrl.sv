// tb_subarray_ctrl: the controller alone, with the subarray and FPU replaced
// by simple responders in the testbench. Checks the MOC sequences it issues:
// the boot-time zeroing of Row 3; one F_MAC as copy->Row1, copy->Row2, triple
// activation, read Row 3, write-back of the MUX output (5 MOCs); a following
// F_MAC of length 2 adds the Row 3 re-zero (6 MOCs each) and steps the
// addresses; READ_SEG returns the selected segment; STOB does not wait for the
// pop counter, STORE_ACT waits for its result.
module tb_subarray_ctrl;
  import atria_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1;
  logic cmd_valid = 0, cmd_ready, rsp_valid;
  pe_cmd_t cmd;
  logic [SEG_BITS-1:0] rsp_data;
  logic moc_valid, moc_done = 0;
  moc_req_t moc;
  logic [ROW_BITS-1:0] sa;
  logic rnd_load, fpu_start, res_valid = 0, pc_busy = 0, act_valid = 0, bts_we, relu_we;
  fpu_path_e fpu_path;
  logic [3:0] fpu_seg; logic [9:0] fpu_bidx; logic [6:0] fpu_len;
  logic [SEG_BITS-1:0] mac_out, res_data;
  logic [7:0] act = 8'd0;
  logic [31:0] n_moc, n_moc_overlap, n_stall, n_fmac;
  int checks = 0, failures = 0;
  logic live = 0;   // reset has been applied and released
  moc_req_t log_q [$];

  subarray_ctrl dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .rsp_valid, .rsp_data,
    .moc_valid, .moc, .moc_done, .sa, .rnd_load, .mac_out, .fpu_start, .fpu_path,
    .fpu_seg, .fpu_bidx, .fpu_len, .res_valid, .res_data, .pc_busy, .act_valid, .act,
    .bts_we, .relu_we, .n_moc, .n_moc_overlap, .n_stall, .n_fmac);
  always #1 clk = ~clk;

  // subarray responder: logs the request, answers 3 cycles later
  initial forever begin
    @(posedge clk);
    if (live && moc_valid) begin
      log_q.push_back(moc);
      repeat (3) @(negedge clk);
      moc_done = 1;
      @(negedge clk);
      moc_done = 0;
    end
  end

  // pop counter stand-in: busy 40 cycles after a POPC start, then act pulse
  initial forever begin
    @(posedge clk);
    if (live && fpu_start && fpu_path == PATH_POPC) begin
      @(negedge clk) pc_busy = 1;
      repeat (40) @(negedge clk);
      pc_busy = 0; act_valid = 1; act = 8'd77;
      @(negedge clk);
      act_valid = 0;
    end
  end

  task automatic send(input pe_cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
  endtask

  task automatic expect_moc(input moc_e op, input logic [7:0] r1, input logic [7:0] rd, input string what);
    moc_req_t m;
    checks++;
    if (log_q.size() == 0) begin failures++; $display("%s: no MOC", what); return; end
    m = log_q.pop_front();
    if (m.op != op || ((op == MOC_READ || op == MOC_COPY) && m.r1 != r1) ||
        ((op == MOC_WRITE || op == MOC_COPY) && m.rd != rd)) begin
      failures++; $display("%s: got op %0d r1 %0d rd %0d", what, m.op, m.r1, m.rd);
    end
  endtask

  initial begin
    pe_cmd_t c;
    sa = '0; mac_out = rand512(); res_data = '0; cmd = '0;
    for (int i = 0; i < 16; i++) sa[512*i +: 512] = rand512();
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    live = 1;
    while (!cmd_ready) @(negedge clk);
    expect_moc(MOC_WRITE, 0, ROW3, "boot zero");
    // single F_MAC
    c = '0; c.op = OP_FMAC; c.row_a = 8'd10; c.row_b = 8'd20; c.row_d = 8'd30; c.seg_d = 4'd15; c.len = 7'd1;
    send(c);
    expect_moc(MOC_COPY, 10, ROW1, "cp1");
    expect_moc(MOC_COPY, 20, ROW2, "cp2");
    expect_moc(MOC_TRA, 0, 0, "tra");
    expect_moc(MOC_READ, ROW3, 0, "rd3");
    checks++;
    if (log_q.size() < 1 || log_q[0].wdata[512*15 +: 512] !== mac_out || log_q[0].seg_we != 16'h8000
        || log_q[0].byte_we) failures++;
    expect_moc(MOC_WRITE, 0, 30, "wb");
    checks++; if (n_moc != 6) begin failures++; $display("n_moc %0d", n_moc); end
    // two F_MACs: re-zero + 5 each, destination segment wraps into the next row
    c.len = 7'd2;
    send(c);
    for (int i = 0; i < 2; i++) begin
      expect_moc(MOC_WRITE, 0, ROW3, "rezero");
      expect_moc(MOC_COPY, 8'(10+i), ROW1, "cp1");
      expect_moc(MOC_COPY, 8'(20+i), ROW2, "cp2");
      expect_moc(MOC_TRA, 0, 0, "tra");
      expect_moc(MOC_READ, ROW3, 0, "rd3");
      expect_moc(MOC_WRITE, 0, 8'(30+i), "wb");
    end
    checks++; if (n_fmac != 3 || n_moc != 18) begin failures++; $display("fmac %0d moc %0d", n_fmac, n_moc); end
    // READ_SEG
    c = '0; c.op = OP_READ_SEG; c.row_a = 8'd5; c.seg_a = 4'd7;
    fork
      send(c);
      begin @(posedge rsp_valid); checks++; if (rsp_data !== sa[512*7 +: 512]) failures++; end
    join
    expect_moc(MOC_READ, 5, 0, "read");
    // STOB returns immediately; STORE_ACT stalls for the result
    c = '0; c.op = OP_STOB; c.row_a = 8'd6; c.seg_a = 4'd3;
    send(c);
    expect_moc(MOC_READ, 6, 0, "stob read");
    repeat (3) @(negedge clk);
    checks++;
    if (!pc_busy || !cmd_ready) begin failures++; $display("STOB waited for the pop counter"); end
    c = '0; c.op = OP_STORE_ACT; c.row_d = 8'd9; c.bidx = 10'd100;
    send(c);
    checks++;
    if (log_q.size() < 1 || log_q[0].wdata[8*100 +: 8] !== 8'd77 || !log_q[0].byte_we || log_q[0].byte_idx != 10'd100) failures++;
    expect_moc(MOC_WRITE, 0, 9, "store act");
    checks++; if (n_stall == 0) begin failures++; $display("no stall counted"); end
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
