// atria_chip: one ATRIA DRAM chip: N_BANKS banks of N_SUB processing elements
// and the chip controller (1Gb with the default 8 x 64 subarrays of 256 x 8Kb).
//
// Chip µ-operations enter through `uop_valid`/`uop`/`uop_ready`; the chip
// controller forwards them to the banks in `bank_mask` (or runs an OP_MOVE).
// Read data appears on `rsp_valid`/`rsp_data`. `idle` is high when the chip
// controller and all banks are idle. Bank/subarray counts follow the paper.
module atria_chip
  import atria_pkg::*;
#(
  parameter int unsigned N_BANKS = 8,
  parameter int unsigned N_SUB   = 64,
  parameter int unsigned ROWS    = 256,
  parameter int unsigned T_MOC   = 34
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                uop_valid,
  input  chip_uop_t           uop,
  output logic                uop_ready,
  output logic                rsp_valid,
  output logic [SEG_BITS-1:0] rsp_data,
  output logic                idle
);
  logic [N_BANKS-1:0]  bank_valid, bank_ready, bank_rsp_valid, bank_idle;
  bank_cmd_t           bank_cmd;
  logic [SEG_BITS-1:0] bank_rsp_data [N_BANKS];
  logic [31:0]         n_move;

  chip_ctrl #(.N_BANKS(N_BANKS)) u_ctrl (
    .clk, .rst_n, .in_valid(uop_valid), .in(uop), .in_ready(uop_ready),
    .rsp_valid, .rsp_data, .bank_valid, .bank_cmd, .bank_ready,
    .bank_rsp_valid, .bank_rsp_data, .n_move
  );

  for (genvar b = 0; b < int'(N_BANKS); b++) begin : g_bank
    atria_bank #(.N_SUB(N_SUB), .ROWS(ROWS), .T_MOC(T_MOC)) u_bank (
      .clk, .rst_n, .in_valid(bank_valid[b]), .in(bank_cmd), .in_ready(bank_ready[b]),
      .rsp_valid(bank_rsp_valid[b]), .rsp_data(bank_rsp_data[b]), .idle(bank_idle[b])
    );
  end

  assign idle = uop_ready && !uop_valid && (bank_valid == 0) && (&bank_idle);
endmodule
