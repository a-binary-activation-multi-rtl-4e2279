// mlc_weight_encoder: turns one signed multi-level weight code into the two
// cell levels programmed into its column pair of MLCs.
//
// A weight w in {-3..+3} x alpha/3 is stored as the current difference of a
// positive and a negative cell (Table-1 style mapping): a positive weight
// programs only the positive cell to level w, a negative weight only the
// negative cell to level -w, and zero leaves both cells at level 0. With
// 4-level (2-bit) cells this gives 7 weight levels; the same rule gives 15
// levels from 3-bit cells or 3 levels from single-level cells, selected by
// the parameters. Codes beyond the cells' range saturate (this design's
// choice). Purely combinational.
module mlc_weight_encoder #(
  parameter int W_BITS    = pim_pkg::W_BITS,
  parameter int CELL_BITS = pim_pkg::CELL_BITS
) (
  input  logic signed [W_BITS-1:0]    w,
  output logic        [CELL_BITS-1:0] lvl_pos,
  output logic        [CELL_BITS-1:0] lvl_neg
);
  localparam int LMAX = (1 << CELL_BITS) - 1;

  logic signed [W_BITS:0] wx;
  logic        [W_BITS:0] mag;

  always_comb begin
    wx  = (W_BITS+1)'(w);               // sign-extend before negating
    mag = w[W_BITS-1] ? -wx : wx;
    if (mag > (W_BITS+1)'(LMAX)) mag = (W_BITS+1)'(LMAX);
    lvl_pos = '0;
    lvl_neg = '0;
    if (w[W_BITS-1]) lvl_neg = CELL_BITS'(mag);
    else             lvl_pos = CELL_BITS'(mag);
  end
endmodule
