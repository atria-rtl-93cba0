// bts_lut: binary-to-stochastic lookup table of the FPU.
//
// An 8-bit binary value is decoded to one of ENTRIES rows of a W-bit SRAM
// array; the selected row goes through a row buffer and is the W-bit
// stochastic bit-vector for that value. The table holds a deterministic
// encoding chosen by the host and written through the write port (`we`,
// `waddr`, `wdata`), which avoids correlation between converted operands.
// Timing: `re` with `raddr`; the address is latched and decoded in the first
// cycle, the row buffer is loaded in the second, so `rvalid`/`rdata` appear two
// cycles after `re` (1 ns at 2 GHz). rdata holds until the next lookup.
// Following the paper: 8-bit input, decoder, 256 rows x 512 columns, row
// buffer, 512-bit output, SRAM storage. This design's own: write port and the
// two-stage pipeline.
module bts_lut #(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned W       = 512,
  parameter int unsigned AW      = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic          rvalid,
  output logic [W-1:0]  rdata
);
  logic [W-1:0]  mem [ENTRIES];
  logic [AW-1:0] addr_q;
  logic          re_q;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_q <= '0;
      re_q   <= 1'b0;
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      re_q   <= re;
      rvalid <= re_q;
      if (re) addr_q <= raddr;
      if (re_q) rdata <= mem[addr_q];
    end
  end
endmodule
