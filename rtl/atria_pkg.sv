// atria_pkg: sizes, operation codes and command structures shared by the
// ATRIA processing element (PE), bank and chip.
//
// The fixed sizes are the ones of the ATRIA DRAM chip: a subarray row is 8Kb,
// which holds sixteen 512-bit stochastic bit-vectors; the accumulate array has
// 512 16:1 multiplexers, each selected by a 4-bit random value; binary values
// are 8 bits. The µ-operation set and its encoding are this design's own: the
// paper names the controller functions (decode, address latches, counters,
// buffers) but not their command format.
package atria_pkg;

  localparam int unsigned ROW_BITS  = 8192;              // 8Kb row / S/As
  localparam int unsigned SEG_BITS  = 512;               // stochastic bit-vector
  localparam int unsigned N_SEG     = ROW_BITS / SEG_BITS; // 16 operands per row
  localparam int unsigned RND_W     = 4;                 // 16:1 MUX select
  localparam int unsigned BIN_W     = 8;                 // binary activation width
  localparam int unsigned ROW_BYTES = ROW_BITS / 8;      // 1024
  localparam int unsigned SEG_BYTES = SEG_BITS / 8;      // 64

  localparam int unsigned MAX_BANKS = 8;
  localparam int unsigned MAX_SUB   = 64;

  // Reserved compute rows (paper's Row 1, Row 2, Row 3).
  localparam logic [7:0] ROW1 = 8'd0;
  localparam logic [7:0] ROW2 = 8'd1;
  localparam logic [7:0] ROW3 = 8'd2;

  // µ-operations understood by a subarray controller (and OP_MOVE, which the
  // chip controller turns into a read and a write).
  typedef enum logic [3:0] {
    OP_NOP         = 4'd0,
    OP_WRITE_SEG   = 4'd1,   // write data into row_d, segment seg_d
    OP_READ_SEG    = 4'd2,   // read row_a, segment seg_a -> response
    OP_FMAC        = 4'd3,   // len x F_MAC: rows row_a+i, row_b+i -> row_d/seg_d+i
    OP_LOAD_RND    = 4'd4,   // RND registers <- low 2048 bits of row_a
    OP_STOB        = 4'd5,   // start pop count of row_a/seg_a (background)
    OP_STORE_ACT   = 4'd6,   // write ReLU(popcount) byte into row_d, byte bidx
    OP_BTOS        = 4'd7,   // byte bidx of row_a -> LUT -> row_d/seg_d
    OP_MAXPOOL     = 4'd8,   // max of first len bytes of row_a/seg_a -> row_d byte bidx
    OP_WR_BTS_LUT  = 4'd9,   // B-to-S LUT entry bidx[7:0] <- data
    OP_WR_RELU_LUT = 4'd10,  // ReLU LUT entry bidx[7:0] <- data[7:0]
    OP_MOVE        = 4'd11   // chip level: src PE row_a/seg_a -> dst PEs row_d/seg_d
  } op_e;

  // Command as seen by one subarray controller.
  typedef struct packed {
    op_e                 op;
    logic [7:0]          row_a;
    logic [7:0]          row_b;
    logic [7:0]          row_d;
    logic [3:0]          seg_a;
    logic [3:0]          seg_d;
    logic [9:0]          bidx;   // byte index within a row / LUT entry
    logic [6:0]          len;    // vector length (F_MAC count, pooled bytes)
    logic [SEG_BITS-1:0] data;
  } pe_cmd_t;

  // Command as seen by a bank controller: adds the subarray mask.
  typedef struct packed {
    logic [MAX_SUB-1:0] sa_mask;
    pe_cmd_t            cmd;
  } bank_cmd_t;

  // µ-operation entering a chip: bank mask, plus the source PE of OP_MOVE.
  typedef struct packed {
    logic [MAX_BANKS-1:0] bank_mask;
    logic [2:0]           src_bank;
    logic [5:0]           src_sa;
    bank_cmd_t            bcmd;
  } chip_uop_t;

  // Memory operation cycles of a subarray.
  typedef enum logic [2:0] {
    MOC_READ  = 3'd0,   // activate row r1, latch into S/As
    MOC_COPY  = 3'd1,   // RowClone r1 -> rd
    MOC_TRA   = 3'd2,   // triple row activation of r1, r2, r3 (majority)
    MOC_WRITE = 3'd3    // write drivers: byte-masked write into rd
  } moc_e;

  typedef struct packed {
    moc_e                 op;
    logic [7:0]           r1;
    logic [7:0]           r2;
    logic [7:0]           r3;
    logic [7:0]           rd;
    logic [N_SEG-1:0]     seg_we;    // write whole 512-bit segments
    logic                 byte_we;   // write one byte ...
    logic [9:0]           byte_idx;  // ... at this byte index
    logic [ROW_BITS-1:0]  wdata;
  } moc_req_t;

  // Bit mask of the cells a MOC_WRITE overwrites.
  function automatic logic [ROW_BITS-1:0] moc_wmask(input moc_req_t r);
    logic [ROW_BITS-1:0] m;
    m = '0;
    for (int s = 0; s < int'(N_SEG); s++)
      if (r.seg_we[s]) m[SEG_BITS*s +: SEG_BITS] = '1;
    if (r.byte_we) m = m | (ROW_BITS'(8'hFF) << (8 * r.byte_idx));
    return m;
  endfunction

  // FPU processing paths (Fig. 4(a) legend).
  typedef enum logic [1:0] {
    PATH_BTOS = 2'd0,
    PATH_POPC = 2'd1,
    PATH_MAXP = 2'd2
  } fpu_path_e;

endpackage
