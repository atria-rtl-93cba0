// subarray_ctrl: controller of one ATRIA processing element.
//
// Takes one µ-operation at a time (`cmd_valid`/`cmd_ready`; ready only when
// idle) and turns it into a sequence of memory operation cycles (MOCs) on the
// subarray and control pulses to the FPU. Each MOC is issued with `moc_valid`
// for one cycle and the controller waits for `moc_done`. Its address latches
// hold the µ-operation, and address counters step through the rows and
// segments of vector operations. The next MOC of a sequence is requested in
// the cycle after `moc_done`, so a sequence of n MOCs takes n*T_MOC cycles plus
// two cycles to accept the command. Sequences:
//   OP_FMAC (len times, counters advance row_a, row_b, and the destination
//     segment/row): [re-zero Row 3] - copy row_a->Row 1 - copy row_b->Row 2 -
//     triple row activation (Row 3 <- Row1 AND Row2) - read Row 3 into the S/As
//     (the MUX array forms F_MAC) - write F_MAC into row_d/segment. That is
//     5 MOCs; a triple activation leaves the product in Row 3, so every F_MAC
//     after the first is preceded by one write MOC that zeroes Row 3 again.
//   OP_WRITE_SEG: one write MOC.  OP_READ_SEG: read MOC, then `rsp_valid`.
//   OP_LOAD_RND: read MOC, then the RND registers load from the S/As.
//   OP_STOB: read MOC, then the pop counter starts on segment seg_a. The
//     controller is free again at once; the conversion (512 cycles) overlaps
//     the following operations. It waits first if the counter is still busy.
//   OP_STORE_ACT: writes the buffered ReLU(popcount) byte into row_d byte
//     bidx; stalls until that result has arrived.
//   OP_BTOS: read MOC, B-to-S lookup of byte bidx, write MOC into row_d/seg_d.
//   OP_MAXPOOL: read MOC, max of the first len bytes of seg_a, write MOC of
//     the byte into row_d byte bidx.
//   OP_WR_BTS_LUT / OP_WR_RELU_LUT: one-cycle LUT write, entry bidx[7:0].
// After reset the controller zeroes Row 3 (one write MOC) before accepting
// commands. Performance counters: MOCs issued, MOCs issued while the pop
// counter was converting (hidden S-to-B latency), stall cycles of STORE_ACT and
// STOB, and F_MACs done. The MOC sequence of F_MAC follows the paper; the
// command set and the Row 3 re-zeroing are this design's own.
module subarray_ctrl
  import atria_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // µ-operation in
  input  logic                cmd_valid,
  input  pe_cmd_t             cmd,
  output logic                cmd_ready,
  output logic                rsp_valid,
  output logic [SEG_BITS-1:0] rsp_data,
  // subarray
  output logic                moc_valid,
  output moc_req_t            moc,
  input  logic                moc_done,
  input  logic [ROW_BITS-1:0] sa,
  // FPU
  output logic                rnd_load,
  input  logic [SEG_BITS-1:0] mac_out,
  output logic                fpu_start,
  output fpu_path_e           fpu_path,
  output logic [3:0]          fpu_seg,
  output logic [9:0]          fpu_bidx,
  output logic [6:0]          fpu_len,
  input  logic                res_valid,
  input  logic [SEG_BITS-1:0] res_data,
  input  logic                pc_busy,
  input  logic                act_valid,
  input  logic [BIN_W-1:0]    act,
  output logic                bts_we,
  output logic                relu_we,
  // performance counters
  output logic [31:0]         n_moc,
  output logic [31:0]         n_moc_overlap,
  output logic [31:0]         n_stall,
  output logic [31:0]         n_fmac
);
  typedef enum logic [3:0] {
    S_BOOT, S_IDLE, S_ISSUE, S_WAIT, S_FPU, S_PCWAIT, S_ACTWAIT
  } state_e;

  typedef enum logic [3:0] {
    T_ZERO3, T_CP1, T_CP2, T_TRA, T_RD3, T_WBMAC,
    T_RDA, T_WRSEG, T_WBACT, T_WBRES
  } step_e;

  state_e       state;
  step_e        step;
  pe_cmd_t      c;            // address latch
  logic [7:0]   cur_a, cur_b; // address counters
  logic [7:0]   cur_drow;
  logic [3:0]   cur_dseg;
  logic [6:0]   left;         // F_MACs still to do
  logic         row3_dirty;
  logic [7:0]   act_q;
  logic         act_full;
  logic [SEG_BITS-1:0] res_q;

  assign cmd_ready = (state == S_IDLE);
  assign fpu_seg   = c.seg_a;
  assign fpu_bidx  = c.bidx;
  assign fpu_len   = c.len;
  assign bts_we    = cmd_valid && cmd_ready && cmd.op == OP_WR_BTS_LUT;
  assign relu_we   = cmd_valid && cmd_ready && cmd.op == OP_WR_RELU_LUT;

  // Write request helpers: data replicated over the row, enables select.
  function automatic moc_req_t wr_seg(input logic [7:0] row, input logic [3:0] sg,
                                      input logic [SEG_BITS-1:0] d);
    moc_req_t r;
    r            = '0;
    r.op         = MOC_WRITE;
    r.rd         = row;
    r.wdata      = {N_SEG{d}};
    r.seg_we[sg] = 1'b1;
    return r;
  endfunction

  function automatic moc_req_t wr_byte(input logic [7:0] row, input logic [9:0] b,
                                       input logic [7:0] d);
    moc_req_t r;
    r          = '0;
    r.op       = MOC_WRITE;
    r.rd       = row;
    r.wdata    = {ROW_BYTES{d}};
    r.byte_we  = 1'b1;
    r.byte_idx = b;
    return r;
  endfunction

  // MOC request of the current step.
  always_comb begin
    moc = '0;
    unique case (step)
      T_ZERO3: begin moc.op = MOC_WRITE; moc.rd = ROW3; moc.seg_we = '1; end
      T_CP1:   begin moc.op = MOC_COPY; moc.r1 = cur_a; moc.rd = ROW1; end
      T_CP2:   begin moc.op = MOC_COPY; moc.r1 = cur_b; moc.rd = ROW2; end
      T_TRA:   begin moc.op = MOC_TRA; moc.r1 = ROW1; moc.r2 = ROW2; moc.r3 = ROW3; end
      T_RD3:   begin moc.op = MOC_READ; moc.r1 = ROW3; end
      T_WBMAC: moc = wr_seg(cur_drow, cur_dseg, mac_out);
      T_RDA:   begin moc.op = MOC_READ; moc.r1 = c.row_a; end
      T_WRSEG: moc = wr_seg(c.row_d, c.seg_d, c.data);
      T_WBACT: moc = wr_byte(c.row_d, c.bidx, act_q);
      T_WBRES: moc = (c.op == OP_BTOS) ? wr_seg(c.row_d, c.seg_d, res_q)
                                       : wr_byte(c.row_d, c.bidx, res_q[7:0]);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_BOOT;
      step          <= T_ZERO3;
      c             <= '0;
      cur_a         <= '0;
      cur_b         <= '0;
      cur_drow      <= '0;
      cur_dseg      <= '0;
      left          <= '0;
      row3_dirty    <= 1'b1;
      act_q         <= '0;
      act_full      <= 1'b0;
      res_q         <= '0;
      moc_valid     <= 1'b0;
      rsp_valid     <= 1'b0;
      rsp_data      <= '0;
      rnd_load      <= 1'b0;
      fpu_start     <= 1'b0;
      fpu_path      <= PATH_BTOS;
      n_moc         <= '0;
      n_moc_overlap <= '0;
      n_stall       <= '0;
      n_fmac        <= '0;
    end else begin
      moc_valid <= 1'b0;
      rsp_valid <= 1'b0;
      rnd_load  <= 1'b0;
      fpu_start <= 1'b0;
      if (act_valid) begin
        act_q    <= act;
        act_full <= 1'b1;
      end
      if (moc_valid) begin
        n_moc <= n_moc + 1;
        if (pc_busy) n_moc_overlap <= n_moc_overlap + 1;
      end

      unique case (state)
        S_BOOT: begin                       // zero Row 3 at boot
          step      <= T_ZERO3;
          moc_valid <= 1'b1;
          state     <= S_WAIT;
        end

        S_IDLE: if (cmd_valid) begin
          c        <= cmd;
          cur_a    <= cmd.row_a;
          cur_b    <= cmd.row_b;
          cur_drow <= cmd.row_d;
          cur_dseg <= cmd.seg_d;
          left     <= (cmd.len == 0) ? 7'd1 : cmd.len;
          unique case (cmd.op)
            OP_FMAC:      begin step <= row3_dirty ? T_ZERO3 : T_CP1; state <= S_ISSUE; end
            OP_WRITE_SEG: begin step <= T_WRSEG; state <= S_ISSUE; end
            OP_READ_SEG, OP_LOAD_RND, OP_BTOS, OP_MAXPOOL:
                          begin step <= T_RDA; state <= S_ISSUE; end
            OP_STOB:      begin step <= T_RDA; state <= S_PCWAIT; end
            OP_STORE_ACT: begin step <= T_WBACT; state <= S_ACTWAIT; end
            default: ;                       // NOP and LUT writes: done
          endcase
        end

        S_PCWAIT: begin                     // pop counter must be free
          if (pc_busy) n_stall <= n_stall + 1;
          else begin moc_valid <= 1'b1; state <= S_WAIT; end
        end

        S_ACTWAIT: begin                    // activation result must be there
          if (!act_full && !act_valid) n_stall <= n_stall + 1;
          else begin moc_valid <= 1'b1; state <= S_WAIT; end
        end

        S_ISSUE: begin
          moc_valid <= 1'b1;
          state     <= S_WAIT;
        end

        S_WAIT: if (moc_done) begin
          moc_valid <= 1'b1;                  // next MOC at once, unless ...
          state     <= S_WAIT;
          unique case (step)
            T_ZERO3: begin
              row3_dirty <= 1'b0;
              if (c.op == OP_FMAC) step <= T_CP1;
              else begin moc_valid <= 1'b0; state <= S_IDLE; end  // boot
            end
            T_CP1:   step <= T_CP2;
            T_CP2:   step <= T_TRA;
            T_TRA:   begin step <= T_RD3; row3_dirty <= 1'b1; end
            T_RD3:   step <= T_WBMAC;
            T_WBMAC: begin
              n_fmac <= n_fmac + 1;
              if (left == 1) begin moc_valid <= 1'b0; state <= S_IDLE; end
              else begin
                left     <= left - 1'b1;
                cur_a    <= cur_a + 1'b1;
                cur_b    <= cur_b + 1'b1;
                cur_dseg <= cur_dseg + 1'b1;
                if (cur_dseg == 4'hF) cur_drow <= cur_drow + 1'b1;
                step     <= T_ZERO3;
              end
            end
            T_RDA: begin
              moc_valid <= 1'b0;
              unique case (c.op)
                OP_READ_SEG: begin
                  rsp_valid <= 1'b1;
                  rsp_data  <= sa[SEG_BITS*c.seg_a +: SEG_BITS];
                  state     <= S_IDLE;
                end
                OP_LOAD_RND: begin rnd_load <= 1'b1; state <= S_IDLE; end
                OP_STOB: begin
                  fpu_start <= 1'b1; fpu_path <= PATH_POPC; state <= S_IDLE;
                end
                OP_BTOS: begin
                  fpu_start <= 1'b1; fpu_path <= PATH_BTOS; state <= S_FPU;
                end
                default: begin      // OP_MAXPOOL
                  fpu_start <= 1'b1; fpu_path <= PATH_MAXP; state <= S_FPU;
                end
              endcase
            end
            T_WBACT: begin act_full <= act_valid; moc_valid <= 1'b0; state <= S_IDLE; end
            default: begin moc_valid <= 1'b0; state <= S_IDLE; end  // T_WRSEG, T_WBRES
          endcase
        end

        S_FPU: if (res_valid) begin
          res_q <= res_data;
          step  <= T_WBRES;
          state <= S_ISSUE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
