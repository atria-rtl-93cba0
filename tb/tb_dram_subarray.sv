// tb_dram_subarray: drives the subarray model with short MOCs (T_MOC = 5) and
// checks masked writes, reads, RowClone copies and the triple row activation
// (majority of three rows, left in all three rows and in the S/As) and
// segment/byte-enabled writes against a
// reference array kept by the testbench; checks that done comes T_MOC - 1 cycles after the
// request is taken.
module tb_dram_subarray;
  import atria_pkg::*;
  localparam int ROWS = 16, TM = 5;
  logic clk = 0, rst_n = 1, req_valid = 0, busy, done;
  moc_req_t req;
  logic [ROW_BITS-1:0] sa;
  logic [ROW_BITS-1:0] ref_rows [ROWS];
  int checks = 0, failures = 0;

  dram_subarray #(.ROWS(ROWS), .T_MOC(TM)) dut (.clk, .rst_n, .req_valid, .req, .busy, .done, .sa);
  always #1 clk = ~clk;

  function automatic logic [ROW_BITS-1:0] rrow();
    logic [ROW_BITS-1:0] r;
    for (int i = 0; i < ROW_BITS/32; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  task automatic moc(input moc_req_t r, input logic [ROW_BITS-1:0] exp_sa);
    int cyc;
    @(negedge clk); req = r; req_valid = 1;
    @(negedge clk); req_valid = 0; cyc = 1;
    while (!done && cyc < 100) begin @(negedge clk); cyc++; end
    checks += 2;
    if (cyc != TM - 1) begin failures++; $display("MOC latency %0d", cyc); end
    if (sa !== exp_sa) begin failures++; $display("S/A mismatch op %0d", r.op); end
  endtask

  initial begin
    moc_req_t r;
    req = '0;
    @(negedge clk) rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // full-row writes
    for (int i = 0; i < ROWS; i++) begin
      r = '0; r.op = MOC_WRITE; r.rd = 8'(i); r.seg_we = '1; r.wdata = rrow();
      ref_rows[i] = r.wdata;
      moc(r, ref_rows[i]);
    end
    for (int t = 0; t < 30; t++) begin
      int a, b, c2, d;
      a = $urandom_range(ROWS-1); b = $urandom_range(ROWS-1);
      c2 = $urandom_range(ROWS-1); d = $urandom_range(ROWS-1);
      r = '0;
      case (t % 4)
        0: begin r.op = MOC_READ; r.r1 = 8'(a); moc(r, ref_rows[a]); end
        1: begin
             r.op = MOC_COPY; r.r1 = 8'(a); r.rd = 8'(d);
             ref_rows[d] = ref_rows[a];
             moc(r, ref_rows[d]);
           end
        2: if (a != b && b != c2 && a != c2) begin
             logic [ROW_BITS-1:0] m;
             m = (ref_rows[a] & ref_rows[b]) | (ref_rows[b] & ref_rows[c2]) | (ref_rows[a] & ref_rows[c2]);
             r.op = MOC_TRA; r.r1 = 8'(a); r.r2 = 8'(b); r.r3 = 8'(c2);
             ref_rows[a] = m; ref_rows[b] = m; ref_rows[c2] = m;
             moc(r, m);
           end
        default: begin
             r.op = MOC_WRITE; r.rd = 8'(d); r.wdata = rrow();
             r.seg_we = 16'($urandom);
             r.byte_we = 1'($urandom); r.byte_idx = 10'($urandom);
             for (int k = 0; k < int'(ROW_BYTES); k++)
               if (r.seg_we[k/64] || (r.byte_we && r.byte_idx == 10'(k)))
                 ref_rows[d][8*k +: 8] = r.wdata[8*k +: 8];
             moc(r, ref_rows[d]);
           end
      endcase
    end
    // read everything back
    for (int i = 0; i < ROWS; i++) begin
      r = '0; r.op = MOC_READ; r.r1 = 8'(i); moc(r, ref_rows[i]);
    end
    // AND through a zero row
    begin
      r = '0; r.op = MOC_WRITE; r.rd = 8'(2); r.seg_we = '1; r.wdata = '0;
      ref_rows[2] = '0; moc(r, '0);
      r = '0; r.op = MOC_TRA; r.r1 = 8'(0); r.r2 = 8'(1); r.r3 = 8'(2);
      moc(r, ref_rows[0] & ref_rows[1]);
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
