// dram_subarray: behavioural model of one ATRIA DRAM subarray (ROWS rows of
// ROW_BITS cells) with its row of sense amplifiers (S/As) and write drivers.
// This is a behavioural model, not synthesizable logic of the real part: DRAM
// cells, charge sharing and sense amplification are analog circuits.
//
// It executes one memory operation cycle (MOC) at a time. A request is taken
// when `req_valid` is high and `busy` low; the effect below lands in the cells
// and S/As T_MOC-2 cycles later and `done` pulses in the cycle after that, so a
// controller that answers `done` with its next request starts one MOC every
// T_MOC cycles (17 ns per MOC = 34 cycles at 2 GHz; T_MOC >= 3):
//   MOC_READ  activate row r1; the S/As latch it.
//   MOC_COPY  RowClone: row rd <- row r1 (S/As hold the copied data).
//   MOC_TRA   triple row activation of rows r1, r2, r3 (Ambit): charge sharing
//             leaves the bitwise majority in all three rows and the S/As; with
//             r3 all zeros this is r1 AND r2, the stochastic multiply.
//   MOC_WRITE write drivers overwrite the segments of row rd flagged in
//             seg_we and/or the byte byte_idx (byte_we) with the matching
//             bits of wdata; the S/As then hold the resulting row.
// `sa` is the S/A latch, read by the FPU. Cell contents start undefined.
module dram_subarray
  import atria_pkg::*;
#(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned T_MOC = 34
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,
  input  moc_req_t            req,
  output logic                busy,
  output logic                done,
  output logic [ROW_BITS-1:0] sa
);
  localparam int unsigned CW = $clog2(T_MOC + 1);
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [ROW_BITS-1:0] cells [ROWS];
  moc_req_t            cur;
  logic [CW-1:0]       cnt;
  logic [ROW_BITS-1:0] wmask;

  assign wmask = moc_wmask(cur);

  // Row address as seen by the local row decoder.
  function automatic logic [RW-1:0] ra(input logic [7:0] r);
    return RW'(r % ROWS);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      cur  <= '0;
      sa   <= '0;
    end else begin
      done <= 1'b0;
      if (req_valid && !busy) begin
        cur  <= req;
        cnt  <= CW'(T_MOC - 3);
        busy <= 1'b1;
      end else if (busy) begin
        if (cnt != 0) begin
          cnt <= cnt - 1'b1;
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          unique case (cur.op)
            MOC_READ:  sa <= cells[ra(cur.r1)];
            MOC_COPY:  sa <= cells[ra(cur.r1)];
            MOC_TRA:   sa <= (cells[ra(cur.r1)] & cells[ra(cur.r2)]) |
                             (cells[ra(cur.r2)] & cells[ra(cur.r3)]) |
                             (cells[ra(cur.r1)] & cells[ra(cur.r3)]);
            MOC_WRITE: sa <= (cells[ra(cur.rd)] & ~wmask) | (cur.wdata & wmask);
            default: ;
          endcase
        end
      end
    end
  end

  // Cell array updates (no reset: DRAM contents are undefined at power-on).
  always_ff @(posedge clk) begin
    if (busy && cnt == 0) begin
      unique case (cur.op)
        MOC_COPY: cells[ra(cur.rd)] <= cells[ra(cur.r1)];
        MOC_TRA: begin
          cells[ra(cur.r1)] <= (cells[ra(cur.r1)] & cells[ra(cur.r2)]) |
                               (cells[ra(cur.r2)] & cells[ra(cur.r3)]) |
                               (cells[ra(cur.r1)] & cells[ra(cur.r3)]);
          cells[ra(cur.r2)] <= (cells[ra(cur.r1)] & cells[ra(cur.r2)]) |
                               (cells[ra(cur.r2)] & cells[ra(cur.r3)]) |
                               (cells[ra(cur.r1)] & cells[ra(cur.r3)]);
          cells[ra(cur.r3)] <= (cells[ra(cur.r1)] & cells[ra(cur.r2)]) |
                               (cells[ra(cur.r2)] & cells[ra(cur.r3)]) |
                               (cells[ra(cur.r1)] & cells[ra(cur.r3)]);
        end
        MOC_WRITE: cells[ra(cur.rd)] <= (cells[ra(cur.rd)] & ~wmask) | (cur.wdata & wmask);
        default: ;
      endcase
    end
  end

  if (T_MOC < 3) begin : g_bad_tmoc
    $error("dram_subarray: T_MOC must be at least 3");
  end

  // A request must not arrive while a MOC is in progress.
  assert property (@(posedge clk) disable iff (!rst_n) !(req_valid && busy));
endmodule
