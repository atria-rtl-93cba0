// chip_ctrl: chip-level controller of ATRIA.
//
// Decodes the bank mask of each chip µ-operation (`in_valid`/`in`/`in_ready`)
// and forwards the bank command to every selected bank in the same cycle once
// all of them are ready (multi-bank activation). Read data from the banks is
// passed to `rsp_valid`/`rsp_data`. It also moves data between PEs, across
// banks or within one: OP_MOVE first sends OP_READ_SEG (row_a, seg_a) to the
// source PE (src_bank, src_sa), keeps the 512-bit answer in a chip buffer, and
// then sends OP_WRITE_SEG (row_d, seg_d) with that data to the PEs named by
// bank_mask/sa_mask. Data moves in binary or stochastic form exactly as
// stored. `n_move` counts completed moves.
// Following the paper: the chip controller is a decoder that helps with
// inter-bank data movement. This design's own: the encoding and the
// read-then-write move through a buffer.
module chip_ctrl
  import atria_pkg::*;
#(
  parameter int unsigned N_BANKS = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  chip_uop_t           in,
  output logic                in_ready,
  output logic                rsp_valid,
  output logic [SEG_BITS-1:0] rsp_data,
  // to/from the banks
  output logic [N_BANKS-1:0]  bank_valid,
  output bank_cmd_t           bank_cmd,
  input  logic [N_BANKS-1:0]  bank_ready,
  input  logic [N_BANKS-1:0]  bank_rsp_valid,
  input  logic [SEG_BITS-1:0] bank_rsp_data [N_BANKS],
  output logic [31:0]         n_move
);
  typedef enum logic [2:0] {C_IDLE, C_FWD, C_MV_RD, C_MV_WAIT, C_MV_WR} cstate_e;

  cstate_e             st;
  chip_uop_t           u;
  logic [N_BANKS-1:0]  sel;
  logic [SEG_BITS-1:0] any_rsp_data;
  logic                any_rsp;

  assign in_ready = (st == C_IDLE);

  always_comb begin
    any_rsp      = |bank_rsp_valid;
    any_rsp_data = '0;
    for (int b = 0; b < int'(N_BANKS); b++)
      if (bank_rsp_valid[b]) any_rsp_data = bank_rsp_data[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= C_IDLE;
      u          <= '0;
      sel        <= '0;
      bank_valid <= '0;
      bank_cmd   <= '0;
      rsp_valid  <= 1'b0;
      rsp_data   <= '0;
      n_move     <= '0;
    end else begin
      bank_valid <= '0;
      rsp_valid  <= 1'b0;
      // responses go to the host unless a move is collecting one
      if (any_rsp && st != C_MV_WAIT) begin
        rsp_valid <= 1'b1;
        rsp_data  <= any_rsp_data;
      end
      unique case (st)
        C_IDLE: if (in_valid) begin
          u <= in;
          if (in.bcmd.cmd.op == OP_MOVE) begin
            sel <= N_BANKS'(1) << in.src_bank;
            st  <= C_MV_RD;
          end else begin
            sel <= in.bank_mask[N_BANKS-1:0];
            st  <= C_FWD;
          end
        end
        C_FWD: if ((bank_ready & sel) == sel) begin
          bank_valid <= sel;
          bank_cmd   <= u.bcmd;
          st         <= C_IDLE;
        end
        C_MV_RD: if ((bank_ready & sel) == sel) begin
          bank_valid            <= sel;
          bank_cmd              <= u.bcmd;
          bank_cmd.sa_mask      <= MAX_SUB'(1) << u.src_sa;
          bank_cmd.cmd.op       <= OP_READ_SEG;
          st                    <= C_MV_WAIT;
        end
        C_MV_WAIT: if (any_rsp) begin
          u.bcmd.cmd.data <= any_rsp_data;   // chip buffer
          sel             <= u.bank_mask[N_BANKS-1:0];
          st              <= C_MV_WR;
        end
        C_MV_WR: if ((bank_ready & sel) == sel) begin
          bank_valid      <= sel;
          bank_cmd        <= u.bcmd;
          bank_cmd.cmd.op <= OP_WRITE_SEG;
          n_move          <= n_move + 1;
          st              <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
