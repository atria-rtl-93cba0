// relu_lut: lookup table that applies the ReLU activation in the binary domain.
//
// The 8-bit result of the pop counter addresses a 256-entry table whose
// entries are the activated 8-bit values. Host-loaded through the write port,
// so the number encoding (and the activation itself) is set by the table
// contents; the reference tables use offset binary with code 128 as zero.
// Timing: `re`/`raddr` in, `rvalid`/`rdata` two cycles later (1 ns at 2 GHz).
// Following the paper: a ReLU LUT after the pop counter. This design's own:
// the 256 x 8 size, the write port and the encoding.
module relu_lut #(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned W       = 8,
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
