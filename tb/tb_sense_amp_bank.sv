// tb_sense_amp_bank: drives small differential signals, including exact
// ties at zero, with random polarities into a bank with offsets and checks
// every decision against sign(bl +/- N_OS). A second bank without offset but
// with white noise is checked statistically: a large positive signal must
// nearly always read 1 and a zero signal must read 1 about half the time.
module tb_sense_amp_bank;
  import tb_ref_pkg::*;
  localparam int N = 16, OSM = 8, SEED = 3;
  int checks = 0, failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;

  logic sense_en = 0;
  pim_pkg::bl_t [N-1:0] bl;
  logic [N-1:0] pol, out_a, out_b;
  int ties_pos = 0, ties_neg = 0;

  sense_amp_bank #(.N (N), .OS_MAX (OSM), .WHITE_SIGMA (0), .SEED (SEED)) dut_a (
    .clk, .sense_en, .bl_diff (bl), .polarity (pol), .sa_out (out_a));
  sense_amp_bank #(.N (N), .OS_MAX (0), .WHITE_SIGMA (16), .SEED (SEED)) dut_b (
    .clk, .sense_en, .bl_diff (bl), .polarity (pol), .sa_out (out_b));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones_big, ones_zero;
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) begin
        int v;
        v = int'($urandom_range(6)) - 3;      // -3..3 -> signals of -48..48
        if (t % 3 == 0) v = 0;
        bl[i] = pim_pkg::bl_t'(v * LVL + int'($urandom_range(2)) - 1);
        if (t % 3 == 0) bl[i] = '0;
        pol[i] = 1'($urandom);
      end
      sense_en = 1;
      @(posedge clk); #1;
      sense_en = 0;
      for (int i = 0; i < N; i++) begin
        bit e;
        e = ref_sense(int'(bl[i]), pol[i], i, SEED, OSM);
        checks++;
        if (out_a[i] != e) begin
          failures++;
          $display("FAIL t=%0d i=%0d bl=%0d pol=%0d got=%0d", t, i, bl[i], pol[i], out_a[i]);
        end
        if (bl[i] == 0) begin
          if (out_a[i]) ties_pos++; else ties_neg++;
        end
      end
      // held without sense_en
      bl = ~bl;
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out_a[i] != ref_sense(int'(~bl[i]), pol[i], i, SEED, OSM)) failures++;
      end
    end
    // a zero signal is decided both ways by the offset polarity
    checks++;
    if (ties_pos == 0 || ties_neg == 0) failures++;

    // white noise statistics on bank b
    ones_big = 0; ones_zero = 0;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) bl[i] = (i < N/2) ? pim_pkg::bl_t'(64) : '0;
      sense_en = 1;
      @(posedge clk); #1;
      sense_en = 0;
      for (int i = 0; i < N; i++)
        if (out_b[i]) begin
          if (i < N/2) ones_big++; else ones_zero++;
        end
    end
    checks++;
    if (ones_big < 200 * (N/2) * 97 / 100) failures++;
    checks++;
    if (ones_zero < 200 * (N/2) * 35 / 100 || ones_zero > 200 * (N/2) * 65 / 100) failures++;
    $display("white noise: %0d of %0d ones at +4 levels, %0d of %0d at zero",
             ones_big, 200 * N/2, ones_zero, 200 * N/2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
