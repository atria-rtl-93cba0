// maxpool: max pooling logic of the FPU, in the binary domain.
//
// Takes a 512-bit segment as N_BYTES unsigned 8-bit activations and returns
// the largest of the first `len` of them (1 <= len <= N_BYTES; bytes at and
// beyond len are masked to 0). A comparator tree with a register after each of
// its log2(N_BYTES) levels: `valid`/`max` appear log2(N_BYTES) cycles after
// `start` (6 cycles, 3 ns at 2 GHz, against the 5 ns the paper quotes), and a
// new start may be given every cycle.
// Following the paper: max pooling of binary values after ReLU. This design's
// own: the window as a byte count within one segment and the tree structure.
module maxpool #(
  parameter int unsigned N_BYTES = 64,
  parameter int unsigned LW      = $clog2(N_BYTES) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [N_BYTES*8-1:0] vec,
  input  logic [LW-1:0]        len,
  output logic                 valid,
  output logic [7:0]           max
);
  localparam int unsigned LEVELS = $clog2(N_BYTES);

  logic [N_BYTES-1:0][7:0]            in_m;   // masked input bytes
  logic [LEVELS:1][N_BYTES-1:0][7:0]  lvl_q;  // tree level registers
  logic [LEVELS:1]                    v_q;

  always_comb begin
    for (int i = 0; i < N_BYTES; i++)
      in_m[i] = (i < int'(len)) ? vec[8*i +: 8] : 8'd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lvl_q <= '0;
      v_q   <= '0;
    end else begin
      v_q[1] <= start;
      for (int i = 0; i < N_BYTES/2; i++)
        lvl_q[1][i] <= (in_m[2*i] > in_m[2*i+1]) ? in_m[2*i] : in_m[2*i+1];
      for (int l = 2; l <= LEVELS; l++) begin
        v_q[l] <= v_q[l-1];
        for (int i = 0; i < N_BYTES/2; i++)
          if (i < (N_BYTES >> l))
            lvl_q[l][i] <= (lvl_q[l-1][2*i] > lvl_q[l-1][2*i+1]) ? lvl_q[l-1][2*i]
                                                                   : lvl_q[l-1][2*i+1];
      end
    end
  end

  assign valid = v_q[LEVELS];
  assign max   = lvl_q[LEVELS][0];
endmodule
