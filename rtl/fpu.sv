// fpu: feature processing unit of one ATRIA processing element.
//
// Sits under the subarray's sense amplifiers (S/As) and works on the row they
// hold (`sa_row`, 8Kb = sixteen 512-bit segments). It contains:
//   - the 512 RND registers and the 512-MUX array (computation path): while
//     the S/As hold the AND result of the triple row activation, `mac_out` is
//     the 512-bit stochastic F_MAC = (N1M1 + ... + N16M16)/16; combinational;
//   - an input demultiplexer (the BL logic picks a segment or byte of the row)
//     that starts one of three paths, chosen by `path` on `start`:
//       PATH_BTOS  byte `bidx` of the row -> B-to-S LUT -> 512-bit vector,
//                  `res_valid` 2 cycles after start;
//       PATH_MAXP  first `len` bytes of segment `seg` -> max pooling,
//                  `res_valid` 6 cycles after start (result in res_data[7:0]);
//       PATH_POPC  segment `seg` -> pop counter -> ReLU LUT; runs in the
//                  background for 512 + 2 cycles and ends with a one-cycle
//                  `act_valid` pulse carrying the activated byte `act`;
//   - an output multiplexer putting the B-to-S or max-pool result on the
//     write-back path (`res_data`).
// `pc_busy` is high while the pop counter converts; starting PATH_POPC then is
// not allowed (the subarray controller waits). The LUTs are loaded through
// their write ports. The blocks and paths are those of the paper's FPU; the
// start/valid protocol and the byte/segment selection are this design's own.
module fpu
  import atria_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ROW_BITS-1:0] sa_row,
  // RND registers and MUX array
  input  logic                rnd_load,
  output logic [SEG_BITS-1:0] mac_out,
  // path control
  input  logic                start,
  input  fpu_path_e           path,
  input  logic [3:0]          seg,
  input  logic [9:0]          bidx,
  input  logic [6:0]          len,
  output logic                res_valid,
  output logic [SEG_BITS-1:0] res_data,
  output logic                pc_busy,
  output logic                act_valid,
  output logic [BIN_W-1:0]    act,
  // LUT write ports
  input  logic                bts_we,
  input  logic [7:0]          bts_waddr,
  input  logic [SEG_BITS-1:0] bts_wdata,
  input  logic                relu_we,
  input  logic [7:0]          relu_waddr,
  input  logic [BIN_W-1:0]    relu_wdata
);
  logic [RND_W-1:0][SEG_BITS-1:0] rnd;
  logic [SEG_BITS-1:0] seg_in;
  logic [7:0]          byte_in;

  rnd_regs #(.N_MUX(SEG_BITS), .RND_W(RND_W)) u_rnd (
    .clk, .rst_n, .load(rnd_load), .load_data(sa_row[SEG_BITS*RND_W-1:0]), .rnd
  );

  sc_mux_array #(.N_MUX(SEG_BITS), .N_IN(N_SEG), .RND_W(RND_W)) u_mux (
    .sa(sa_row), .rnd, .f(mac_out)
  );

  // BL logic: segment / byte selection from the S/A row.
  assign seg_in  = sa_row[SEG_BITS*seg +: SEG_BITS];
  assign byte_in = sa_row[8*bidx +: 8];

  // B-to-S path
  logic                bts_valid;
  logic [SEG_BITS-1:0] bts_data;
  bts_lut #(.ENTRIES(256), .W(SEG_BITS)) u_bts (
    .clk, .rst_n, .we(bts_we), .waddr(bts_waddr), .wdata(bts_wdata),
    .re(start && path == PATH_BTOS), .raddr(byte_in),
    .rvalid(bts_valid), .rdata(bts_data)
  );

  // Max pooling path
  logic       mp_valid;
  logic [7:0] mp_max;
  maxpool #(.N_BYTES(SEG_BYTES)) u_mp (
    .clk, .rst_n, .start(start && path == PATH_MAXP), .vec(seg_in), .len,
    .valid(mp_valid), .max(mp_max)
  );

  // Pop counter -> ReLU path
  logic             pc_done;
  logic [BIN_W-1:0] pc_count;
  pop_counter #(.W(SEG_BITS), .CNT_W(BIN_W)) u_pc (
    .clk, .rst_n, .start(start && path == PATH_POPC), .din(seg_in),
    .busy(pc_busy), .done(pc_done), .count(pc_count)
  );

  relu_lut #(.ENTRIES(256), .W(BIN_W)) u_relu (
    .clk, .rst_n, .we(relu_we), .waddr(relu_waddr), .wdata(relu_wdata),
    .re(pc_done), .raddr(pc_count), .rvalid(act_valid), .rdata(act)
  );

  // Output multiplexer onto the write-back path.
  always_comb begin
    res_valid = bts_valid | mp_valid;
    res_data  = bts_valid ? bts_data : {{(SEG_BITS-8){1'b0}}, mp_max};
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   !(start && path == PATH_POPC && pc_busy));
endmodule
