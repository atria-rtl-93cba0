// tb_atria_top: end-to-end run of the ATRIA module at reduced size (2 chips x
// 2 banks x 2 PEs, 32 rows, T_MOC = 4). Both chips get the same µ-operation
// program, one CNN layer step:
//   multicast LUT loading, RND loading and weight/operand rows to all PEs;
//   binary activations -> B-to-S into 16 stochastic operands (PE b0/s0);
//   F_MAC with stochastic weights; pop count (S-to-B) overlapped with another
//   F_MAC (Row 3 re-zero); ReLU store, and a second pop count whose store
//   stalls; move of the activation segment to PE b1/s1 (inter-bank);
//   max pooling there; results read back and compared with a reference model
//   of AND, 16:1 selection, pop count, ReLU and max computed here.
// Each mechanism (multicast, B-to-S, F_MAC, Row 3 re-zero, pop-count overlap,
// stall, move, max pooling) is counted and must occur at least once.
module tb_atria_top;
  import atria_pkg::*;
  import tb_util_pkg::*;
  localparam int NC = 2, NB = 2, NS = 2, TM = 4;
  logic clk = 0, rst_n = 1;
  logic [NC-1:0] uop_valid = '0, uop_ready, rsp_valid, idle;
  chip_uop_t uop [NC];
  logic [SEG_BITS-1:0] rsp_data [NC];
  int checks = 0, failures = 0;
  int n_multicast = 0, n_btos = 0, n_fmac_cmd = 0, n_maxpool = 0;
  logic [3:0] rnd_ref [512];
  logic [SEG_BITS-1:0] w_row [16], act_seg, got [NC];
  logic [7:0] acts [16];

  atria_top #(.N_CHIPS(NC), .N_BANKS(NB), .N_SUB(NS), .ROWS(32), .T_MOC(TM)) dut (
    .clk, .rst_n, .uop_valid, .uop, .uop_ready, .rsp_valid, .rsp_data, .idle);
  always #1 clk = ~clk;
  int n_rsp = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) if (rsp_valid[c]) got[c] <= rsp_data[c];
    if (rsp_valid[0]) n_rsp <= n_rsp + 1;
  end

  `define PE00 dut.g_chip[0].u_chip.g_bank[0].u_bank.g_pe[0].u_pe.u_ctrl
  `define PE11 dut.g_chip[0].u_chip.g_bank[1].u_bank.g_pe[1].u_pe.u_ctrl

  // send the same µ-operation to every chip and wait until all are idle
  task automatic run(input chip_uop_t u);
    @(negedge clk);
    for (int c = 0; c < NC; c++) uop[c] = u;
    uop_valid = '1;
    while (uop_valid != 0) begin
      logic [NC-1:0] take;
      take = uop_ready & uop_valid;   // accepted at the coming rising edge
      @(negedge clk);
      uop_valid = uop_valid & ~take;
    end
    @(negedge clk);
    while (idle != '1) @(negedge clk);
    if ($countones(u.bank_mask) * $countones(u.bcmd.sa_mask) > 1) n_multicast++;
  endtask

  function automatic chip_uop_t mk(input op_e op, input logic [7:0] bm, input logic [63:0] sm);
    chip_uop_t u;
    u = '0; u.bank_mask = bm; u.bcmd.sa_mask = sm; u.bcmd.cmd.op = op;
    return u;
  endfunction

  task automatic rd(input int b, input int s, input int row, input int seg);
    chip_uop_t u;
    u = mk(OP_READ_SEG, 8'(1) << b, 64'(1) << s);
    u.bcmd.cmd.row_a = 8'(row); u.bcmd.cmd.seg_a = 4'(seg);
    begin
      int n0, k;
      n0 = n_rsp;
      run(u);
      k = 0;
      // the response reaches the chip port a few cycles after the PE is idle
      while (n_rsp == n0 && k < 100) begin @(negedge clk); k++; end
      @(negedge clk);
    end
  endtask

  task automatic chk_all(input logic [511:0] e, input string what);
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (got[c] !== e) begin failures++; $display("%s mismatch on chip %0d: %h vs %h", what, c, got[c][63:0], e[63:0]); end
    end
  endtask

  initial begin
    chip_uop_t u;
    logic [ROW_BITS-1:0] rrow;
    logic [511:0] fmac, fmac2, e;
    logic [7:0] a1, a2, mx;
    for (int c = 0; c < NC; c++) uop[c] = '0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    while (idle != '1) @(negedge clk);
    // LUTs, multicast to all PEs
    for (int v = 0; v < 256; v++) begin
      u = mk(OP_WR_BTS_LUT, '1, '1); u.bcmd.cmd.bidx = 10'(v); u.bcmd.cmd.data = therm(8'(v)); run(u);
      u = mk(OP_WR_RELU_LUT, '1, '1); u.bcmd.cmd.bidx = 10'(v); u.bcmd.cmd.data = 512'(relu(8'(v))); run(u);
    end
    // RND values (row 20, segments 0..3), multicast
    for (int s = 0; s < 4; s++) begin
      rrow[512*s +: 512] = rand512();
      u = mk(OP_WRITE_SEG, '1, '1); u.bcmd.cmd.row_d = 8'd20; u.bcmd.cmd.seg_d = 4'(s);
      u.bcmd.cmd.data = rrow[512*s +: 512]; run(u);
    end
    for (int j = 0; j < 512; j++) rnd_ref[j] = {rrow[1536+j], rrow[1024+j], rrow[512+j], rrow[j]};
    u = mk(OP_LOAD_RND, '1, '1); u.bcmd.cmd.row_a = 8'd20; run(u);
    // weights (stochastic, stored a priori) in row 5 of every PE
    for (int s = 0; s < 16; s++) begin
      w_row[s] = rand512();
      u = mk(OP_WRITE_SEG, '1, '1); u.bcmd.cmd.row_d = 8'd5; u.bcmd.cmd.seg_d = 4'(s);
      u.bcmd.cmd.data = w_row[s]; run(u);
    end
    // binary activations in row 3 of PE b0/s0 -> B-to-S into row 4
    for (int i = 0; i < 16; i++) acts[i] = 8'($urandom);
    u = mk(OP_WRITE_SEG, 8'b1, 64'b1); u.bcmd.cmd.row_d = 8'd3; u.bcmd.cmd.seg_d = 4'd0;
    u.bcmd.cmd.data = '0;
    for (int i = 0; i < 16; i++) u.bcmd.cmd.data[8*i +: 8] = acts[i];
    run(u);
    for (int i = 0; i < 16; i++) begin
      u = mk(OP_BTOS, 8'b1, 64'b1); u.bcmd.cmd.row_a = 8'd3; u.bcmd.cmd.bidx = 10'(i);
      u.bcmd.cmd.row_d = 8'd4; u.bcmd.cmd.seg_d = 4'(i); run(u);
      n_btos++;
    end
    rd(0, 0, 4, 7); chk_all(therm(acts[7]), "btos");
    // F_MAC: activations (row 4) x weights (row 5) -> row 8 seg 0
    for (int j = 0; j < 512; j++) fmac[j] = therm(acts[rnd_ref[j]])[j] & w_row[rnd_ref[j]][j];
    u = mk(OP_FMAC, 8'b1, 64'b1); u.bcmd.cmd.row_a = 8'd4; u.bcmd.cmd.row_b = 8'd5;
    u.bcmd.cmd.row_d = 8'd8; u.bcmd.cmd.seg_d = 4'd0; u.bcmd.cmd.len = 7'd1; run(u); n_fmac_cmd++;
    rd(0, 0, 8, 0); chk_all(fmac, "fmac");
    // prepare row 10 seg 0 (activation segment)
    act_seg = rand512();
    u = mk(OP_WRITE_SEG, 8'b1, 64'b1); u.bcmd.cmd.row_d = 8'd10; u.bcmd.cmd.seg_d = 4'd0;
    u.bcmd.cmd.data = act_seg; run(u);
    // S-to-B of the F_MAC result, overlapped with a second F_MAC (rows 4,5 -> row 9)
    a1 = relu((ones512(fmac) / 2 > 255) ? 8'd255 : 8'(ones512(fmac) / 2));
    u = mk(OP_STOB, 8'b1, 64'b1); u.bcmd.cmd.row_a = 8'd8; u.bcmd.cmd.seg_a = 4'd0; run(u);
    u = mk(OP_FMAC, 8'b1, 64'b1); u.bcmd.cmd.row_a = 8'd4; u.bcmd.cmd.row_b = 8'd5;
    u.bcmd.cmd.row_d = 8'd9; u.bcmd.cmd.seg_d = 4'd0; u.bcmd.cmd.len = 7'd1; run(u); n_fmac_cmd++;
    u = mk(OP_STORE_ACT, 8'b1, 64'b1); u.bcmd.cmd.row_d = 8'd10; u.bcmd.cmd.bidx = 10'd0; run(u);
    act_seg[7:0] = a1;
    rd(0, 0, 9, 0); chk_all(fmac, "fmac again");
    // second S-to-B, stored at once: stalls
    fmac2 = fmac & w_row[3];
    u = mk(OP_WRITE_SEG, 8'b1, 64'b1); u.bcmd.cmd.row_d = 8'd9; u.bcmd.cmd.seg_d = 4'd1;
    u.bcmd.cmd.data = fmac2; run(u);
    a2 = relu((ones512(fmac2) / 2 > 255) ? 8'd255 : 8'(ones512(fmac2) / 2));
    u = mk(OP_STOB, 8'b1, 64'b1); u.bcmd.cmd.row_a = 8'd9; u.bcmd.cmd.seg_a = 4'd1; run(u);
    u = mk(OP_STORE_ACT, 8'b1, 64'b1); u.bcmd.cmd.row_d = 8'd10; u.bcmd.cmd.bidx = 10'd1; run(u);
    act_seg[15:8] = a2;
    rd(0, 0, 10, 0); chk_all(act_seg, "activations");
    // move the activation segment to PE b1/s1, row 11 seg 0 (inter-bank)
    u = mk(OP_MOVE, 8'b10, 64'b10); u.src_bank = 3'd0; u.src_sa = 6'd0;
    u.bcmd.cmd.row_a = 8'd10; u.bcmd.cmd.seg_a = 4'd0; u.bcmd.cmd.row_d = 8'd11; u.bcmd.cmd.seg_d = 4'd0;
    run(u);
    rd(1, 1, 11, 0); chk_all(act_seg, "move");
    // max pooling of the first 4 activations -> row 12 byte 0
    mx = 0;
    for (int i = 0; i < 4; i++) if (act_seg[8*i +: 8] > mx) mx = act_seg[8*i +: 8];
    u = mk(OP_MAXPOOL, 8'b10, 64'b10); u.bcmd.cmd.row_a = 8'd11; u.bcmd.cmd.seg_a = 4'd0;
    u.bcmd.cmd.len = 7'd4; u.bcmd.cmd.row_d = 8'd12; u.bcmd.cmd.bidx = 10'd0; run(u); n_maxpool++;
    rd(1, 1, 12, 0);
    for (int c = 0; c < NC; c++) begin checks++; if (got[c][7:0] !== mx) failures++; end
    // mechanisms
    $display("multicast=%0d btos=%0d fmac=%0d rezero_mocs=%0d overlap_mocs=%0d stall_cycles=%0d moves=%0d maxpool=%0d",
             n_multicast, n_btos, `PE00.n_fmac, `PE00.n_moc - 5*`PE00.n_fmac, `PE00.n_moc_overlap,
             `PE00.n_stall, dut.g_chip[0].u_chip.n_move, n_maxpool);
    checks += 8;
    if (n_multicast == 0) failures++;
    if (n_btos == 0) failures++;
    if (`PE00.n_fmac != 2) failures++;
    if (`PE00.n_moc_overlap == 0) failures++;
    if (`PE00.n_stall == 0) failures++;
    if (dut.g_chip[0].u_chip.n_move != 1) failures++;
    if (n_maxpool == 0) failures++;
    if (`PE11.n_fmac != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
