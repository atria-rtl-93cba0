// pop_counter: stochastic-to-binary conversion of one 512-bit bit-vector.
//
// A parallel-input serial-output register is loaded with the bit-vector on
// `start` and shifts one bit per clock into an 8-bit counter, so a conversion
// takes W clock cycles (512 cycles = 256 ns at 2 GHz). Since a 512-bit vector
// stands for an 8-bit value at twice the 256-bit full-precision length, a
// divide-by-two stage sits ahead of the counter: the result is floor(ones/2),
// held at 2**CNT_W-1 if all W bits are one.
// Interface: `start` with `din` when not busy; `busy` while shifting; `done`
// pulses for one cycle with `count` valid (count holds until the next start).
// Following the paper: PISO register, serial 1-bit path, 8-bit counter, one
// bit per cycle. This design's own choice: the divide-by-two stage.
module pop_counter #(
  parameter int unsigned W     = 512,
  parameter int unsigned CNT_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [W-1:0]     din,
  output logic             busy,
  output logic             done,
  output logic [CNT_W-1:0] count
);
  logic [W-1:0]           piso;
  logic [$clog2(W+1)-1:0] left;
  logic                   half;   // divide-by-two stage

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      piso  <= '0;
      left  <= '0;
      half  <= 1'b0;
      count <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        piso  <= din;
        left  <= ($clog2(W+1))'(W);
        half  <= 1'b0;
        count <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        piso <= piso >> 1;
        left <= left - 1'b1;
        if (piso[0]) begin
          half <= ~half;
          if (half) begin
            if (count != '1) count <= count + 1'b1;   // saturate
          end
        end
        if (left == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
