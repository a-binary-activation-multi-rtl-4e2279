// tb_mlc_array: programs a small array with random cell levels, applies
// random wordline patterns and compares each column pair's differential
// signal with sum_k X_k ((W+ + dW+) - (W- + dW-)) computed here, including
// the frozen per-cell errors. Also checks that the output holds while no
// evaluation is requested.
module tb_mlc_array;
  import tb_ref_pkg::*;
  localparam int ROWS = 12, PAIRS = 7, DWM = 3, SEED = 5;
  int checks = 0, failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;

  logic prog_en = 0, eval_en = 0;
  logic [3:0] prog_row = '0;
  logic [PAIRS-1:0][1:0] prog_pos, prog_neg;
  logic [ROWS-1:0] wl = '0;
  pim_pkg::bl_t [PAIRS-1:0] bl_diff;

  mlc_array #(.ROWS (ROWS), .PAIRS (PAIRS), .CELL_BITS (2), .DW_MAX (DWM), .SEED (SEED)) dut (
    .clk, .prog_en, .prog_row, .prog_pos, .prog_neg, .eval_en, .wl, .bl_diff);

  int lp [ROWS][PAIRS];
  int ln [ROWS][PAIRS];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // program every row
    for (int r = 0; r < ROWS; r++) begin
      for (int p = 0; p < PAIRS; p++) begin
        int w;
        w = int'($urandom_range(6)) - 3;
        lp[r][p] = w > 0 ? w : 0;
        ln[r][p] = w < 0 ? -w : 0;
        prog_pos[p] = 2'(lp[r][p]);
        prog_neg[p] = 2'(ln[r][p]);
      end
      prog_row = 4'(r);
      prog_en  = 1;
      @(posedge clk); #1;
    end
    prog_en = 0;
    for (int t = 0; t < 40; t++) begin
      wl = ROWS'($urandom);
      if (t == 0) wl = '1;
      if (t == 1) wl = '0;
      eval_en = 1;
      @(posedge clk); #1;
      eval_en = 0;
      for (int p = 0; p < PAIRS; p++) begin
        int e;
        e = 0;
        for (int r = 0; r < ROWS; r++)
          if (wl[r]) begin
            int cid;
            cid = (r * PAIRS + p) * 2;
            e += (lp[r][p] - ln[r][p]) * LVL
               + ref_mismatch(cid, SEED, DWM) - ref_mismatch(cid + 1, SEED, DWM);
          end
        checks++;
        if (int'(bl_diff[p]) != e) begin
          failures++;
          $display("FAIL t=%0d pair=%0d got=%0d exp=%0d", t, p, bl_diff[p], e);
        end
      end
      // no evaluation: output must hold
      begin
        pim_pkg::bl_t [PAIRS-1:0] held;
        held = bl_diff;
        wl = ~wl;
        @(posedge clk); #1;
        for (int p = 0; p < PAIRS; p++) begin
          checks++;
          if (bl_diff[p] != held[p]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
