// tb_softmax_unit: random and hand-picked score vectors (all equal, one
// dominant, spreads beyond the table) against a real-valued softmax
// computed here; each probability must be within 3 LSB (2^-16) of the exact
// value and the probabilities must sum to 1 within N LSB. Checks the
// N-clock latency.
module tb_softmax_unit;
  localparam int N = 12, S = 2;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, start = 0, busy, done;
  logic signed [N-1:0][11:0] scores;
  logic [3:0] max_idx;
  logic [N-1:0][15:0] probs;

  softmax_unit #(.N (N), .S_W (12), .PROB_BITS (16), .SCORE_PER_NAT (S)) dut (
    .clk, .rst_n, .start, .scores, .max_idx, .busy, .done, .probs);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int s [N];
      int best, lat, tot;
      real z, ex [N];
      best = 0;
      for (int j = 0; j < N; j++) begin
        s[j] = int'($urandom_range(60)) - 30;
        if (t == 0) s[j] = 5;                          // uniform
        if (t == 1) s[j] = (j == 7) ? 40 : -40;        // one dominant
        if (t == 2) s[j] = (j < 6) ? 100 : -100;       // differences beyond the table
        scores[j] = 12'(s[j]);
        if (s[j] > s[best]) best = j;
      end
      max_idx = 4'(best);
      z = 0.0;
      for (int j = 0; j < N; j++) begin
        ex[j] = $exp(real'(s[j] - s[best]) / real'(S));
        z += ex[j];
      end
      start = 1;
      @(posedge clk); #1;
      start = 0;
      scores = ~scores;                                  // captured at start
      lat = 0;
      while (!done && lat < 100) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != N) begin failures++; $display("FAIL latency %0d", lat); end
      tot = 0;
      for (int j = 0; j < N; j++) begin
        real expv, err;
        expv = ex[j] / z * 65536.0;
        if (expv > 65535.0) expv = 65535.0;
        err = real'(probs[j]) - expv;
        tot += int'(probs[j]);
        checks++;
        if (err > 3.0 || err < -3.0) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d j=%0d got=%0d exp=%f", t, j, probs[j], expv);
        end
      end
      checks++;
      if (tot < 65536 - N - 1 || tot > 65536) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
