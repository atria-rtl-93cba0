// atria_bank: one DRAM bank of ATRIA: N_SUB processing elements (subarrays
// with FPUs and subarray controllers) under one bank controller.
//
// Bank µ-operations enter through `in_valid`/`in`/`in_ready`; the bank
// controller multicasts them to the PEs selected by the subarray mask. Read
// data returns on `rsp_valid`/`rsp_data` two cycles after the PE produced it.
// `idle` is high when the bank holds no command and every PE is idle.
// Organisation (64 subarrays per bank) follows the paper.
module atria_bank
  import atria_pkg::*;
#(
  parameter int unsigned N_SUB = 64,
  parameter int unsigned ROWS  = 256,
  parameter int unsigned T_MOC = 34
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  bank_cmd_t           in,
  output logic                in_ready,
  output logic                rsp_valid,
  output logic [SEG_BITS-1:0] rsp_data,
  output logic                idle
);
  logic [N_SUB-1:0]    pe_valid, pe_ready, pe_rsp_valid;
  pe_cmd_t             pe_cmd;
  logic [SEG_BITS-1:0] pe_rsp_data [N_SUB];

  bank_ctrl #(.N_SUB(N_SUB)) u_ctrl (
    .clk, .rst_n, .in_valid, .in, .in_ready, .rsp_valid, .rsp_data, .idle,
    .pe_valid, .pe_cmd, .pe_ready, .pe_rsp_valid, .pe_rsp_data
  );

  for (genvar s = 0; s < int'(N_SUB); s++) begin : g_pe
    atria_pe #(.ROWS(ROWS), .T_MOC(T_MOC)) u_pe (
      .clk, .rst_n, .cmd_valid(pe_valid[s]), .cmd(pe_cmd), .cmd_ready(pe_ready[s]),
      .rsp_valid(pe_rsp_valid[s]), .rsp_data(pe_rsp_data[s])
    );
  end
endmodule
