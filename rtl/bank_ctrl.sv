// bank_ctrl: bank-level controller of ATRIA.
//
// Latches one bank µ-operation (`in_valid`/`in_ready`) in its address latch,
// decodes the subarray mask and, once every selected subarray controller is
// ready, multicasts the PE command to all of them in the same cycle (multi-
// subarray activation) with a one-cycle `pe_valid[s]`. Read responses of the
// PEs are merged (only one PE may answer in a cycle) and registered onto
// `rsp_valid`/`rsp_data` one cycle later. `idle` is high when nothing is
// latched and every PE controller is ready.
// Following the paper: decoding of µ-operations into addresses, vector lengths
// and control codes sent to the active subarrays, with multi-subarray
// activation. This design's own: the mask encoding and the handshake.
module bank_ctrl
  import atria_pkg::*;
#(
  parameter int unsigned N_SUB = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  bank_cmd_t           in,
  output logic                in_ready,
  output logic                rsp_valid,
  output logic [SEG_BITS-1:0] rsp_data,
  output logic                idle,
  // to/from the subarray controllers
  output logic [N_SUB-1:0]    pe_valid,
  output pe_cmd_t             pe_cmd,
  input  logic [N_SUB-1:0]    pe_ready,
  input  logic [N_SUB-1:0]    pe_rsp_valid,
  input  logic [SEG_BITS-1:0] pe_rsp_data [N_SUB]
);
  logic             held;
  logic [N_SUB-1:0] mask_q;
  logic             go;

  assign in_ready = !held;
  assign go       = held && ((mask_q & pe_ready) == mask_q);
  assign idle     = !held && (pe_valid == 0) && (&pe_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held     <= 1'b0;
      mask_q   <= '0;
      pe_cmd   <= '0;
      pe_valid <= '0;
    end else begin
      pe_valid <= '0;
      if (in_valid && in_ready) begin
        held   <= 1'b1;
        mask_q <= in.sa_mask[N_SUB-1:0];
        pe_cmd <= in.cmd;
      end else if (go) begin
        held     <= 1'b0;
        pe_valid <= mask_q;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      rsp_valid <= |pe_rsp_valid;
      rsp_data  <= '0;
      for (int s = 0; s < int'(N_SUB); s++)
        if (pe_rsp_valid[s]) rsp_data <= pe_rsp_data[s];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pe_rsp_valid));
endmodule
