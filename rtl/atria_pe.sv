// atria_pe: one ATRIA processing element (PE): a DRAM subarray with its
// feature processing unit (FPU) and subarray controller.
//
// The controller receives µ-operations (`cmd_valid`/`cmd_ready`, read data on
// `rsp_valid`/`rsp_data`) and drives the subarray's memory operation cycles
// and the FPU. The FPU reads the subarray's sense amplifiers directly and its
// results reach the cells through the controller's write MOCs (write-back
// path). With the default T_MOC of 34 cycles (17 ns at 2 GHz) one F_MAC of
// sixteen 512-bit operand pairs takes 5 MOCs. The three-part structure is the
// paper's; see the sub-blocks for what is this design's own.
module atria_pe
  import atria_pkg::*;
#(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned T_MOC = 34
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  input  pe_cmd_t             cmd,
  output logic                cmd_ready,
  output logic                rsp_valid,
  output logic [SEG_BITS-1:0] rsp_data
);
  logic                moc_valid, moc_busy, moc_done;
  moc_req_t            moc;
  logic [ROW_BITS-1:0] sa;
  logic                rnd_load, fpu_start, res_valid, pc_busy, act_valid;
  logic                bts_we, relu_we;
  fpu_path_e           fpu_path;
  logic [3:0]          fpu_seg;
  logic [9:0]          fpu_bidx;
  logic [6:0]          fpu_len;
  logic [SEG_BITS-1:0] mac_out, res_data;
  logic [BIN_W-1:0]    act;
  logic [31:0]         n_moc, n_moc_overlap, n_stall, n_fmac;

  dram_subarray #(.ROWS(ROWS), .T_MOC(T_MOC)) u_sub (
    .clk, .rst_n, .req_valid(moc_valid), .req(moc),
    .busy(moc_busy), .done(moc_done), .sa
  );

  subarray_ctrl u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .rsp_valid, .rsp_data,
    .moc_valid, .moc, .moc_done, .sa,
    .rnd_load, .mac_out, .fpu_start, .fpu_path, .fpu_seg, .fpu_bidx, .fpu_len,
    .res_valid, .res_data, .pc_busy, .act_valid, .act, .bts_we, .relu_we,
    .n_moc, .n_moc_overlap, .n_stall, .n_fmac
  );

  fpu u_fpu (
    .clk, .rst_n, .sa_row(sa), .rnd_load, .mac_out,
    .start(fpu_start), .path(fpu_path), .seg(fpu_seg), .bidx(fpu_bidx), .len(fpu_len),
    .res_valid, .res_data, .pc_busy, .act_valid, .act,
    .bts_we, .bts_waddr(cmd.bidx[7:0]), .bts_wdata(cmd.data),
    .relu_we, .relu_waddr(cmd.bidx[7:0]), .relu_wdata(cmd.data[BIN_W-1:0])
  );
endmodule
