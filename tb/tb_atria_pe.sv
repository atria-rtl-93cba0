// tb_atria_pe: one processing element end to end (ROWS = 32, T_MOC = 4).
// Loads both LUTs and the RND registers, writes operand rows, runs a vector
// F_MAC of length 2 and checks each result bit against AND + 16:1 selection
// computed here, and the MOC counts (5 for the first F_MAC, 6 for the next);
// converts a result with the pop counter while another F_MAC runs (overlap),
// stores the ReLU activation (with and without a stall), converts it back with
// B-to-S and max-pools a segment.
module tb_atria_pe;
  import atria_pkg::*;
  import tb_util_pkg::*;
  localparam int TM = 4;
  logic clk = 0, rst_n = 1;
  logic cmd_valid = 0, cmd_ready, rsp_valid;
  pe_cmd_t cmd;
  logic [SEG_BITS-1:0] rsp_data, got;
  logic [ROW_BITS-1:0] rows [32];
  logic [3:0] rnd_ref [512];
  int checks = 0, failures = 0;

  atria_pe #(.ROWS(32), .T_MOC(TM)) dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .rsp_valid, .rsp_data);
  always #1 clk = ~clk;

  task automatic send(input pe_cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
  endtask

  task automatic wr_seg(input int r, input int s, input logic [511:0] d);
    pe_cmd_t c;
    c = '0; c.op = OP_WRITE_SEG; c.row_d = 8'(r); c.seg_d = 4'(s); c.data = d;
    rows[r][512*s +: 512] = d;
    send(c);
  endtask

  task automatic rd_seg(input int r, input int s, output logic [511:0] d);
    pe_cmd_t c;
    c = '0; c.op = OP_READ_SEG; c.row_a = 8'(r); c.seg_a = 4'(s);
    fork
      send(c);
      begin @(posedge clk iff rsp_valid); d = rsp_data; end
    join
  endtask

  function automatic logic [511:0] fmac_ref(input int ra, input int rb);
    logic [511:0] f;
    for (int j = 0; j < 512; j++) f[j] = rows[ra][512*rnd_ref[j] + j] & rows[rb][512*rnd_ref[j] + j];
    return f;
  endfunction

  task automatic chk(input logic [511:0] g, input logic [511:0] e, input string what);
    checks++;
    if (g !== e) begin failures++; $display("%s mismatch", what); end
  endtask

  initial begin
    pe_cmd_t c;
    int m0, cyc;
    logic [7:0] a1, a2;
    cmd = '0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!cmd_ready) @(negedge clk);
    // LUTs
    for (int e = 0; e < 256; e++) begin
      c = '0; c.op = OP_WR_BTS_LUT; c.bidx = 10'(e); c.data = therm(8'(e)); send(c);
      c = '0; c.op = OP_WR_RELU_LUT; c.bidx = 10'(e); c.data = 512'(relu(8'(e))); send(c);
    end
    // RND registers from row 20
    for (int s = 0; s < 16; s++) wr_seg(20, s, rand512());
    for (int j = 0; j < 512; j++) rnd_ref[j] = {rows[20][1536+j], rows[20][1024+j], rows[20][512+j], rows[20][j]};
    c = '0; c.op = OP_LOAD_RND; c.row_a = 8'd20; send(c);
    // operands
    for (int r = 4; r < 8; r++) for (int s = 0; s < 16; s++) wr_seg(r, s, rand512());
    // F_MAC x2: rows (4,5) -> row 10 seg 15, rows (5,6) -> row 11 seg 0
    m0 = int'(dut.n_moc);
    c = '0; c.op = OP_FMAC; c.row_a = 8'd4; c.row_b = 8'd5; c.row_d = 8'd10; c.seg_d = 4'd15; c.len = 7'd2;
    send(c);
    checks++;
    if (int'(dut.n_moc) - m0 != 11) begin failures++; $display("F_MAC x2 took %0d MOCs", int'(dut.n_moc) - m0); end
    rd_seg(10, 15, got); chk(got, fmac_ref(4, 5), "fmac 1");
    rows[10][512*15 +: 512] = got;
    rd_seg(11, 0, got);  chk(got, fmac_ref(5, 6), "fmac 2");
    rows[11][0 +: 512] = got;
    // single F_MAC: 6 MOCs (Row 3 re-zero + 5), 6 x T_MOC + 2 cycles
    m0 = int'(dut.n_moc);
    c = '0; c.op = OP_FMAC; c.row_a = 8'd6; c.row_b = 8'd7; c.row_d = 8'd12; c.seg_d = 4'd3; c.len = 7'd1;
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0; cyc = 1;
    while (!cmd_ready) begin @(negedge clk); cyc++; end
    checks += 2;
    if (int'(dut.n_moc) - m0 != 6) failures++;
    if (cyc != 6*TM + 2) begin failures++; $display("F_MAC cycles %0d", cyc); end
    rd_seg(12, 3, got); chk(got, fmac_ref(6, 7), "fmac 3");
    // S-to-B in the background of another F_MAC
    rd_seg(10, 15, got);
    a1 = relu((ones512(got)/2 > 255) ? 8'd255 : 8'(ones512(got)/2));
    c = '0; c.op = OP_STOB; c.row_a = 8'd10; c.seg_a = 4'd15; send(c);
    c = '0; c.op = OP_FMAC; c.row_a = 8'd4; c.row_b = 8'd5; c.row_d = 8'd13; c.seg_d = 4'd0; c.len = 7'd1; send(c);
    checks++; if (dut.n_moc_overlap == 0) begin failures++; $display("no overlap"); end
    c = '0; c.op = OP_STORE_ACT; c.row_d = 8'd14; c.bidx = 10'd3; send(c);
    rd_seg(14, 0, got);
    checks++; if (got[8*3 +: 8] !== a1) begin failures++; $display("act %0d exp %0d", got[8*3 +: 8], a1); end
    // S-to-B followed at once by STORE_ACT: stalls
    m0 = int'(dut.n_stall);
    rd_seg(11, 0, got);
    a2 = relu((ones512(got)/2 > 255) ? 8'd255 : 8'(ones512(got)/2));
    c = '0; c.op = OP_STOB; c.row_a = 8'd11; c.seg_a = 4'd0; send(c);
    c = '0; c.op = OP_STORE_ACT; c.row_d = 8'd14; c.bidx = 10'd70; send(c);
    checks++; if (int'(dut.n_stall) - m0 < 400) begin failures++; $display("stall %0d", int'(dut.n_stall) - m0); end
    rd_seg(14, 1, got);
    checks++; if (got[8*6 +: 8] !== a2) failures++;
    // B-to-S of the stored activation
    c = '0; c.op = OP_BTOS; c.row_a = 8'd14; c.bidx = 10'd3; c.row_d = 8'd15; c.seg_d = 4'd9; send(c);
    rd_seg(15, 9, got); chk(got, therm(a1), "btos");
    // max pooling of 10 bytes of a segment
    wr_seg(16, 1, rand512());
    begin
      logic [7:0] e; e = 0;
      for (int i = 0; i < 10; i++) if (rows[16][512 + 8*i +: 8] > e) e = rows[16][512 + 8*i +: 8];
      c = '0; c.op = OP_MAXPOOL; c.row_a = 8'd16; c.seg_a = 4'd1; c.len = 7'd10; c.row_d = 8'd17; c.bidx = 10'd1023;
      send(c);
      rd_seg(17, 15, got);
      checks++; if (got[511 -: 8] !== e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
