// atria_top: the ATRIA accelerator, an 8Gb DRAM module of N_CHIPS chips, each
// of N_BANKS banks with N_SUB processing elements (4096 PEs by default).
//
// The host-side controller drives each chip through its own µ-operation port
// (`uop_valid[c]`/`uop[c]`/`uop_ready[c]`) and receives read data on
// `rsp_valid[c]`/`rsp_data[c]`; `idle[c]` reports when chip c has finished all
// accepted work (background pop counts excepted). Chips do not talk to each
// other. Sizes follow the paper; the per-chip port is this design's own.
module atria_top
  import atria_pkg::*;
#(
  parameter int unsigned N_CHIPS = 8,
  parameter int unsigned N_BANKS = 8,
  parameter int unsigned N_SUB   = 64,
  parameter int unsigned ROWS    = 256,
  parameter int unsigned T_MOC   = 34
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_CHIPS-1:0]  uop_valid,
  input  chip_uop_t           uop       [N_CHIPS],
  output logic [N_CHIPS-1:0]  uop_ready,
  output logic [N_CHIPS-1:0]  rsp_valid,
  output logic [SEG_BITS-1:0] rsp_data  [N_CHIPS],
  output logic [N_CHIPS-1:0]  idle
);
  for (genvar c = 0; c < int'(N_CHIPS); c++) begin : g_chip
    atria_chip #(.N_BANKS(N_BANKS), .N_SUB(N_SUB), .ROWS(ROWS), .T_MOC(T_MOC)) u_chip (
      .clk, .rst_n, .uop_valid(uop_valid[c]), .uop(uop[c]), .uop_ready(uop_ready[c]),
      .rsp_valid(rsp_valid[c]), .rsp_data(rsp_data[c]), .idle(idle[c])
    );
  end
endmodule
