// tb_prng: checks the polarity generator against an xorshift32 model: the
// reset value, that bits change only on step, the word order of each step's
// output, and a rough balance of ones and zeros.
module tb_prng;
  import tb_ref_pkg::*;
  localparam int NB = 100;                 // not a multiple of 32 on purpose
  localparam logic [31:0] SEED = 32'h1234_5678;
  int checks = 0, failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, step = 0;
  logic [NB-1:0] bits;

  prng #(.NBITS (NB), .SEED (SEED)) dut (.clk, .rst_n, .step, .bits);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned s;
    logic [127:0] exp;
    int ones;
    ones = 0;
    s = SEED;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (bits != '0) failures++;
    for (int t = 0; t < 500; t++) begin
      step = (t % 3 != 2);
      @(posedge clk); #1;
      if (step) begin
        for (int w = 0; w < 4; w++) begin
          s = ref_xorshift(s);
          exp[w*32 +: 32] = s;
        end
      end
      checks++;
      if (t > 0 && bits != exp[NB-1:0]) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d got=%h exp=%h", t, bits, exp[NB-1:0]);
      end
      if (step) ones += $countones(bits);
    end
    step = 0;
    // about 333 steps x 100 bits: expect 50 % ones within a few percent
    checks++;
    if (ones < 333 * NB * 47 / 100 || ones > 334 * NB * 53 / 100) failures++;
    $display("ones: %0d", ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
