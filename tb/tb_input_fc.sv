// tb_input_fc: full-size input layer (40 x 128). Random Win and MFCC
// vectors; each binary output must equal (sum_k x_k Win[k][j] > 0), and done
// must come N_IN clocks after the start edge. A start while busy is ignored.
module tb_input_fc;
  localparam int NI = 40, NO = 128;
  int checks = 0, failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, prog_en = 0, start = 0, busy, done;
  logic [5:0] prog_row = '0;
  pim_pkg::wcode_t [NO-1:0] prog_w;
  logic signed [NI-1:0][7:0] x;
  logic [NO-1:0] h0;
  int w [NI][NO];

  input_fc #(.N_IN (NI), .N_OUT (NO), .X_BITS (8)) dut (
    .clk, .rst_n, .prog_en, .prog_row, .prog_w, .start, .x, .busy, .done, .h0);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    ones = 0;
    x = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < NI; k++) begin
      for (int j = 0; j < NO; j++) begin
        w[k][j] = int'($urandom_range(6)) - 3;
        prog_w[j] = 3'(w[k][j]);
      end
      prog_row = 6'(k); prog_en = 1;
      @(posedge clk); #1;
    end
    prog_en = 0;
    for (int t = 0; t < 30; t++) begin
      int lat;
      logic signed [NI-1:0][7:0] xs;
      for (int k = 0; k < NI; k++) x[k] = 8'($urandom);
      if (t == 0) x = '0;                 // all sums zero: every output 0
      xs = x;
      start = 1;
      @(posedge clk); #1;
      start = 0;
      x = ~x;                             // input is captured at start
      @(posedge clk); #1;
      start = 1;                          // ignored while busy
      @(posedge clk); #1;
      start = 0;
      lat = 2;
      while (!done && lat < 200) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != NI) begin failures++; $display("FAIL latency %0d", lat); end
      for (int j = 0; j < NO; j++) begin
        int s;
        s = 0;
        for (int k = 0; k < NI; k++) s += int'($signed(xs[k])) * w[k][j];
        checks++;
        if (h0[j] != (s > 0)) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d j=%0d sum=%0d got=%0d", t, j, s, h0[j]);
        end
        ones += h0[j];
      end
      @(posedge clk); #1;
      checks++;
      if (busy) failures++;               // the ignored start did not restart it
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
