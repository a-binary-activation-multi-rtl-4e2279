// mlc_array: behavioural model of the multi-level-cell eNVM array that
// computes one GRU layer's matrix-vector products in memory.
//
// Not synthesizable logic: it stands for an analog eNVM macro (ReRAM, PCM or
// CMOS-MLC). Each weight occupies a pair of cells on one row, a positive and
// a negative column; row k is driven by the binary activation wl[k]. When a
// row is on, each cell sinks a current proportional to its programmed level,
// and the two bitlines of a pair carry sum_k X_k (W+_k + dW+_k) and
// sum_k X_k (W-_k + dW-_k). The model returns their difference, the
// pre-activation that the sense-amp resolves.
//
// Currents are signed integers with LVL_UNITS (16) units per cell level
// (I_fs/3 for 4-level cells). dW is the static per-cell programming error:
// a fixed pseudo-random value in [-DW_MAX, DW_MAX] units per cell, frozen
// when the row is programmed (N_MLC of the noise model); DW_MAX = 0 gives an
// ideal array. Its distribution is a choice of this model.
//
// Interface and timing:
//   prog_en   - writes the levels of every cell on row prog_row in one clock.
//               Cells are not reset: every row must be programmed before use,
//               as a freshly fabricated eNVM would be.
//   eval_en   - on that clock edge bl_diff is updated from the current wl.
//               bl_diff is held until the next evaluation.
module mlc_array #(
  parameter int ROWS      = 256,
  parameter int PAIRS     = 256,
  parameter int CELL_BITS = pim_pkg::CELL_BITS,
  parameter int DW_MAX    = 0,
  parameter int SEED      = 1
) (
  input  logic                               clk,
  input  logic                               prog_en,
  input  logic [$clog2(ROWS)-1:0]            prog_row,
  input  logic [PAIRS-1:0][CELL_BITS-1:0]    prog_pos,
  input  logic [PAIRS-1:0][CELL_BITS-1:0]    prog_neg,
  input  logic                               eval_en,
  input  logic [ROWS-1:0]                    wl,
  output pim_pkg::bl_t [PAIRS-1:0]           bl_diff
);
  import pim_pkg::*;

  // Net current of each cell pair when its row is on, in units.
  typedef logic signed [11:0] cell_t;
  cell_t pair_cur [ROWS][PAIRS];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int p = 0; p < PAIRS; p++) begin
        int cid;
        cid = (int'(prog_row) * PAIRS + p) * 2;
        pair_cur[prog_row][p] <= cell_t'(
            (int'(prog_pos[p]) - int'(prog_neg[p])) * LVL_UNITS
          + mismatch(cid,     SEED, DW_MAX)     // dW+ of the positive cell
          - mismatch(cid + 1, SEED, DW_MAX));   // dW- of the negative cell
      end
    end
  end

  always_ff @(posedge clk) begin
    if (eval_en) begin
      for (int p = 0; p < PAIRS; p++) begin
        bl_t acc;
        acc = '0;
        for (int r = 0; r < ROWS; r++)
          if (wl[r]) acc += bl_t'(pair_cur[r][p]);
        bl_diff[p] <= acc;
      end
    end
  end
endmodule
