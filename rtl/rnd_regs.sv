// rnd_regs: the 512 four-bit registers that hold the random select values
// RND_1..RND_512 of the bit-parallel accumulate MUX array.
//
// The values are "pre-determined" and latched before F_MAC operations run, so
// that the MUX array can select in one step. The registers are kept as RND_W
// bit-planes of N_MUX bits: bit b of register j is rnd[b][j]. All registers
// load together when `load` is high, plane b from load_data[N_MUX*b +: N_MUX]
// (so the 2048 source bits are stored plane by plane). One-cycle write
// latency; the outputs are the register contents.
// Following the paper: 512 registers of 4 bits, one per 16:1 MUX. This
// design's own choices: the parallel load (from a DRAM row), the bit-plane
// layout of the source bits, and reset to 0.
module rnd_regs #(
  parameter int unsigned N_MUX = 512,
  parameter int unsigned RND_W = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load,
  input  logic [N_MUX*RND_W-1:0]       load_data,
  output logic [RND_W-1:0][N_MUX-1:0]  rnd
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    rnd <= '0;
    else if (load) rnd <= load_data;
  end
endmodule
