// tb_twd_white: the accelerator at its default size with white sense noise
// switched on (WHITE_SIGMA = 16 units, one cell level), offsets and cell
// errors off. White noise is a fresh random sample per comparison, so no
// reference can predict the hidden states bit for bit; this test checks its
// effect statistically instead.
//
// The weights are programmed with sparse random 7-level codes and one
// utterance of 125 frames is streamed. At every sense edge of either GRU
// layer the testbench recomputes each column pair's noiseless
// pre-activation from the programmed codes and the wordline pattern the
// layer actually drove, checks the array's bitline sum against it exactly,
// and then compares the sense-amp decision with the noiseless decision
// (pre-activation > 0). Decisions are binned by the distance of the
// pre-activation from zero, in cell levels, and the flip rate of each bin
// must fall in a band around the Gaussian tail probability for the noise
// actually generated (sum of 12 uniforms on [-8, 8], standard deviation
// about 17 units): about 0.49 at 0 levels, 0.17 at 1, 0.03 at 2, 0.003 at
// 3 and none beyond. The output layer and softmax are digital, so the
// scores after the last frame are checked exactly against the hidden state
// the second layer ended with. Frame and result latencies are checked as in
// the noiseless test. Mechanisms counted (each must occur): flips at 0, 1
// and 2 levels, and results.
module tb_twd_white;
  localparam int NI = 40, NH = 128, NC = 12, LVL = 16;
  localparam int NFR = 125;
  int checks = 0, failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic prog_en = 0;
  pim_pkg::prog_sel_e prog_sel;
  logic [7:0] prog_row;
  pim_pkg::wcode_t [2*NH-1:0] prog_w;
  logic mfcc_valid = 0, mfcc_first = 0, mfcc_last = 0, mfcc_ready;
  logic signed [NI-1:0][7:0] mfcc;
  logic result_valid;
  logic signed [NC-1:0][11:0] logits;
  logic [3:0] class_idx;
  logic [NC-1:0][15:0] probs;

  twd_pim_top #(.OS_MAX (0), .DW_MAX (0), .WHITE_SIGMA (16)) dut (
    .clk, .rst_n, .prog_en, .prog_sel, .prog_row, .prog_w,
    .mfcc_valid, .mfcc_first, .mfcc_last, .mfcc, .mfcc_ready,
    .result_valid, .logits, .class_idx, .probs);

  int win  [NI][NH];
  int wl1  [2*NH][2*NH];
  int wl2  [2*NH][2*NH];
  int wout [NH][NC];

  // decisions and flips binned by |pre-activation| in cell levels (4 = 4+)
  int n_dec  [5];
  int n_flip [5];
  int n_result = 0;

  function automatic int rnd_w();
    return ($urandom_range(2) == 0) ? int'($urandom_range(6)) - 3 : 0;
  endfunction

  // noiseless pre-activations of one layer for the wordline pattern wl
  function automatic void layer_pre(input int w [2*NH][2*NH], input logic [2*NH-1:0] wl,
                                    output int pre [2*NH]);
    for (int p = 0; p < 2*NH; p++) begin
      pre[p] = 0;
      for (int r = 0; r < 2*NH; r++) if (wl[r]) pre[p] += w[r][p] * LVL;
    end
  endfunction

  // On a sense edge the array holds the sums for the current wordlines;
  // the decisions are visible just after the edge.
  task automatic observe(input int layer);
    int pre [2*NH];
    logic [2*NH-1:0] wl;
    wl = (layer == 1) ? dut.u_l1.wl : dut.u_l2.wl;
    if (layer == 1) layer_pre(wl1, wl, pre); else layer_pre(wl2, wl, pre);
    for (int p = 0; p < 2*NH; p++) begin
      int bl;
      bl = (layer == 1) ? int'($signed(dut.u_l1.bl_diff[p])) : int'($signed(dut.u_l2.bl_diff[p]));
      checks++;
      if (bl != pre[p]) begin
        failures++;
        $display("FAIL layer %0d pair %0d bitline %0d, expected %0d", layer, p, bl, pre[p]);
      end
    end
    #1;
    for (int p = 0; p < 2*NH; p++) begin
      int d;
      logic sa;
      sa = (layer == 1) ? dut.u_l1.sa_out[p] : dut.u_l2.sa_out[p];
      d = (pre[p] < 0 ? -pre[p] : pre[p]) / LVL;
      if (d > 4) d = 4;
      n_dec[d]++;
      if (sa != (pre[p] > 0)) n_flip[d]++;
    end
  endtask

  always @(posedge clk) if (rst_n && dut.u_l1.sense_en) observe(1);
  always @(posedge clk) if (rst_n && dut.u_l2.sense_en) observe(2);

  int res_seen = 0;
  always @(posedge clk) if (rst_n && result_valid) res_seen++;

  task automatic program_rows(input pim_pkg::prog_sel_e sel, input int rows, input int cols);
    for (int r = 0; r < rows; r++) begin
      prog_w = '0;
      for (int c = 0; c < cols; c++) begin
        int v;
        v = rnd_w();
        case (sel)
          pim_pkg::PROG_WIN:  win[r][c]  = v;
          pim_pkg::PROG_L1:   wl1[r][c]  = v;
          pim_pkg::PROG_L2:   wl2[r][c]  = v;
          default:            wout[r][c] = v;
        endcase
        prog_w[c] = 3'(v);
      end
      prog_sel = sel; prog_row = 8'(r); prog_en = 1;
      @(posedge clk); #1;
    end
    prog_en = 0;
  endtask

  // flip rate of bin d must lie in [lo, hi]
  task automatic check_bin(input int d, input real lo, input real hi, input int min_n);
    real rate;
    rate = (n_dec[d] == 0) ? 0.0 : real'(n_flip[d]) / real'(n_dec[d]);
    $display("distance %0d levels: %0d decisions, %0d flipped (%f)", d, n_dec[d], n_flip[d], rate);
    checks++;
    if (n_dec[d] < min_n || rate < lo || rate > hi) begin
      failures++;
      $display("FAIL distance %0d: rate %f outside [%f, %f] or fewer than %0d samples",
               d, rate, lo, hi, min_n);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [NI-1:0][7:0] x;
    for (int d = 0; d < 5; d++) begin n_dec[d] = 0; n_flip[d] = 0; end
    mfcc = '0; prog_sel = pim_pkg::PROG_WIN; prog_row = '0; prog_w = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    program_rows(pim_pkg::PROG_WIN,  NI,   NH);
    program_rows(pim_pkg::PROG_L1,   2*NH, 2*NH);
    program_rows(pim_pkg::PROG_L2,   2*NH, 2*NH);
    program_rows(pim_pkg::PROG_WOUT, NH,   NC);

    for (int f = 0; f < NFR; f++) begin
      int lat;
      for (int k = 0; k < NI; k++) x[k] = 8'($urandom);
      mfcc       = x;
      mfcc_first = (f == 0);
      mfcc_last  = (f == NFR - 1);
      mfcc_valid = 1;
      do @(negedge clk); while (!mfcc_ready);
      @(posedge clk); #1;                      // accepted on this edge
      mfcc_valid = 0;
      lat = 0;
      do begin @(posedge clk); #1; lat++; end while (!mfcc_ready && lat < 1000);
      checks++;
      if (lat != ((f == NFR - 1) ? NI + 9 + NH + 2 : NI + 9)) begin
        failures++;
        $display("FAIL frame %0d latency %0d", f, lat);
      end
    end

    begin
      int rl, best;
      int s [NC];
      rl = 0;
      while (!result_valid && rl < 100) begin @(posedge clk); #1; rl++; end
      checks++;
      if (rl != NC + 1) begin failures++; $display("FAIL result latency %0d", rl); end
      best = 0;
      for (int j = 0; j < NC; j++) begin
        s[j] = 0;
        for (int k = 0; k < NH; k++) if (dut.u_l2.h[k]) s[j] += wout[k][j];
        if (s[j] > s[best]) best = j;
        checks++;
        if (int'($signed(logits[j])) != s[j]) begin failures++; $display("FAIL logit %0d", j); end
      end
      checks++;
      if (int'(class_idx) != best) begin failures++; $display("FAIL class %0d", class_idx); end
      n_result++;
      $display("utterance (%0d frames): class %0d, score %0d, p=%0d/65536",
               NFR, class_idx, s[best], probs[best]);
      @(posedge clk); #1;
    end

    check_bin(0, 0.40,  0.58,  200);
    check_bin(1, 0.11,  0.23,  1000);
    check_bin(2, 0.010, 0.055, 1000);
    check_bin(3, 0.0,   0.012, 1000);
    check_bin(4, 0.0,   0.002, 1000);
    $display("mechanisms: flips@0=%0d flips@1=%0d flips@2=%0d results=%0d",
             n_flip[0], n_flip[1], n_flip[2], n_result);
    checks++; if (n_flip[0] == 0) failures++;
    checks++; if (n_flip[1] == 0) failures++;
    checks++; if (n_flip[2] == 0) failures++;
    checks++; if (n_result != 1 || res_seen != 1) begin failures++; $display("FAIL results %0d seen %0d", n_result, res_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
