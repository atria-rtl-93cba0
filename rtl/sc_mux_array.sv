// sc_mux_array: bit-parallel stochastic scaled accumulation.
//
// The 8Kb sense-amplifier row holds N_IN stochastic bit-vectors of N_MUX bits
// each, vector k in bits [k*N_MUX +: N_MUX]. MUX j receives bit j of every
// vector and outputs the one chosen by its random select value, whose bit b
// is rnd[b][j]. Because the selects are spread evenly over the inputs, the
// N_MUX-bit output is a stochastic bit-vector of (V_1 + ... + V_N_IN) / N_IN:
// the scaled accumulation of F_MAC. The 512 MUXes are written as one
// decoder per input over all MUXes at once: sel_k marks the MUXes whose
// select equals k, and f is the OR over k of (vector k AND sel_k), which is
// bit for bit the 16:1 selection. Purely combinational (2 ns in the paper).
// Following the paper: 512 MUXes of 16 inputs with 4-bit selects, inputs
// striped so that each MUX sees one bit of each of the 16 vectors.
module sc_mux_array #(
  parameter int unsigned N_MUX = 512,
  parameter int unsigned N_IN  = 16,
  parameter int unsigned RND_W = $clog2(N_IN)
) (
  input  logic [N_IN*N_MUX-1:0]       sa,
  input  logic [RND_W-1:0][N_MUX-1:0] rnd,
  output logic [N_MUX-1:0]            f
);
  logic [N_IN-1:0][N_MUX-1:0] vec;   // the N_IN bit-vectors of the row

  assign vec = sa;

  always_comb begin
    logic [N_MUX-1:0] sel;
    f = '0;
    for (int k = 0; k < int'(N_IN); k++) begin
      sel = '1;
      for (int b = 0; b < int'(RND_W); b++)
        sel = sel & (((k >> b) & 1) != 0 ? rnd[b] : ~rnd[b]);
      f = f | (vec[k] & sel);
    end
  end
endmodule
