// tb_output_fc: full-size output layer (128 x 12). Random Wout and hidden
// states; checks every score (sum of the codes of rows whose hidden bit is
// 1), the argmax with ties resolved to the lower class, and the N_IN-clock
// latency. Includes an all-zero hidden state, where every class ties.
module tb_output_fc;
  localparam int NI = 128, NC = 12;
  int checks = 0, failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, prog_en = 0, start = 0, busy, done;
  logic [6:0] prog_row = '0;
  pim_pkg::wcode_t [NC-1:0] prog_w;
  logic [NI-1:0] h;
  logic signed [NC-1:0][11:0] logits;
  logic [3:0] class_idx;
  int w [NI][NC];

  output_fc #(.N_IN (NI), .N_CLS (NC), .L_W (12)) dut (
    .clk, .rst_n, .prog_en, .prog_row, .prog_w, .start, .h, .busy, .done,
    .logits, .class_idx);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    h = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < NI; k++) begin
      for (int j = 0; j < NC; j++) begin
        w[k][j] = int'($urandom_range(6)) - 3;
        prog_w[j] = 3'(w[k][j]);
      end
      prog_row = 7'(k); prog_en = 1;
      @(posedge clk); #1;
    end
    prog_en = 0;
    for (int t = 0; t < 40; t++) begin
      int lat, best;
      int s [NC];
      logic [NI-1:0] hs;
      for (int i = 0; i < NI; i += 32) h[i +: 32] = $urandom;
      if (t == 0) h = '0;
      hs = h;
      start = 1;
      @(posedge clk); #1;
      start = 0;
      h = ~h;
      lat = 0;
      while (!done && lat < 400) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != NI) begin failures++; $display("FAIL latency %0d", lat); end
      best = 0;
      for (int j = 0; j < NC; j++) begin
        s[j] = 0;
        for (int k = 0; k < NI; k++) if (hs[k]) s[j] += w[k][j];
        if (s[j] > s[best]) best = j;
        checks++;
        if (int'($signed(logits[j])) != s[j]) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d class %0d got=%0d exp=%0d", t, j, logits[j], s[j]);
        end
      end
      checks++;
      if (int'(class_idx) != best) begin
        failures++;
        $display("FAIL t=%0d class got=%0d exp=%0d", t, class_idx, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
