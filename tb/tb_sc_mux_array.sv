// tb_sc_mux_array: checks the 512 x 16:1 MUX array bit by bit against the
// striped wiring (MUX j, input k <- vector k, bit j), and checks the scaled
// accumulation on thermometer-coded vectors: with the selects spread evenly
// (each input chosen by 32 of the 512 MUXes, in a shuffled order) the output
// pop count must be close to the mean of the 16 inputs' pop counts.
module tb_sc_mux_array;
  import tb_util_pkg::*;
  localparam int N = 512, K = 16;
  logic [K*N-1:0] sa;
  logic [3:0][N-1:0] rnd;
  logic [3:0]     sel [N];   // select value of each MUX
  logic [N-1:0]   f;
  logic [N-1:0]   vecs [K];
  int checks = 0, failures = 0;

  sc_mux_array #(.N_MUX(N), .N_IN(K), .RND_W(4)) dut (.sa, .rnd, .f);

  task automatic setrnd();
    for (int j = 0; j < N; j++) for (int b = 0; b < 4; b++) rnd[b][j] = sel[j][b];
  endtask

  initial begin
    // exact wiring check
    for (int t = 0; t < 20; t++) begin
      for (int k = 0; k < K; k++) begin vecs[k] = rand512(); sa[k*N +: N] = vecs[k]; end
      for (int j = 0; j < N; j++) sel[j] = 4'($urandom);
      setrnd();
      #1;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (f[j] !== vecs[sel[j]][j]) failures++;
      end
    end
    // scaled accumulation: evenly spread selects
    for (int j = 0; j < N; j++) sel[j] = 4'(j % K);
    for (int j = N-1; j > 0; j--) begin
      int r; logic [3:0] tmp;
      r = $urandom_range(j, 0); tmp = sel[j]; sel[j] = sel[r]; sel[r] = tmp;
    end
    setrnd();
    for (int t = 0; t < 20; t++) begin
      int sum, got, exp;
      sum = 0;
      for (int k = 0; k < K; k++) begin
        logic [7:0] v; v = 8'($urandom); sa[k*N +: N] = therm(v); sum += 2*int'(v);
      end
      #1;
      got = ones512(f); exp = sum / K;
      checks++;
      if (got < exp - 64 || got > exp + 64) begin
        failures++; $display("accumulate off: got %0d expected about %0d", got, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
