// tb_gru_logic: random gate/candidate vectors and update/clear strobes
// against the binary GRU rule h <= g ? h : c, with h cleared to zero.
module tb_gru_logic;
  localparam int N = 128;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, clear = 0, update = 0;
  logic [N-1:0] g, c, h, model;
  int kept = 0, loaded = 0;

  gru_logic #(.N (N)) dut (.clk, .rst_n, .clear, .update, .g, .c, .h);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    g = '0; c = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (h != '0) failures++;
    for (int t = 0; t < 1000; t++) begin
      for (int i = 0; i < N; i += 32) begin
        g[i +: 32] = $urandom;
        c[i +: 32] = $urandom;
      end
      update = ($urandom_range(3) != 0);
      clear  = ($urandom_range(15) == 0);
      @(posedge clk); #1;
      if (clear) model = '0;
      else if (update) begin
        for (int i = 0; i < N; i++) begin
          if (g[i]) kept++; else loaded++;
          model[i] = g[i] ? model[i] : c[i];
        end
      end
      checks++;
      if (h != model) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
