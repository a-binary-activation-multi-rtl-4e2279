// tb_twd_noise: the accelerator with all static hardware errors switched on
// and ternary weights (pairs of single-level cells are emulated with levels
// 0 and 1 of the 4-level cells). Each cell carries a fixed programming error
// of up to +-DWM units (N_MLC) and each sense-amp an offset of up to +-OSM
// units (N_OS), larger than half a cell level so that offsets also flip
// decisions on pre-activations of +-1 level. The reference model includes
// the same frozen errors and the PRNG polarities, so the hidden states must
// match exactly after every frame. White noise stays off because it cannot
// be predicted. Three utterances of 5, 20 and 125 frames are run.
module tb_twd_noise;
  import tb_ref_pkg::*;
  localparam int NI = 40, NH = 128, NC = 12, OSM = 24, DWM = 4;
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

  twd_pim_top #(.OS_MAX (OSM), .DW_MAX (DWM), .WHITE_SIGMA (0)) dut (
    .clk, .rst_n, .prog_en, .prog_sel, .prog_row, .prog_w,
    .mfcc_valid, .mfcc_first, .mfcc_last, .mfcc, .mfcc_ready,
    .result_valid, .logits, .class_idx, .probs);

  // ---------------- reference network ----------------
  int win  [NI][NH];
  int wl1  [2*NH][2*NH];
  int wl2  [2*NH][2*NH];
  int wout [NH][NC];
  bit [NH-1:0] m_h0, m_h1, m_h2;
  int unsigned prng_s = 32'h2545_F491;
  int n_cellerr = 0;
  int n_keep = 0, n_load = 0, n_tie1 = 0, n_tie0 = 0, n_stall = 0, n_clear = 0, n_result = 0;

  function automatic int rnd_w();
    return int'($urandom_range(2)) - 1;        // ternary: -1, 0, +1
  endfunction

  // one GRU layer timestep; w is the layer's array, seed its analog seed
  task automatic ref_layer(input int w [2*NH][2*NH], input bit [NH-1:0] x,
                           input bit [2*NH-1:0] pol, input int seed,
                           inout bit [NH-1:0] h);
    bit [2*NH-1:0] wlv, sa;
    wlv = {x, h};
    for (int p = 0; p < 2*NH; p++) begin
      int pre;
      pre = 0;
      for (int r = 0; r < 2*NH; r++)
        if (wlv[r]) begin
          int cid;
          cid = (r * 2*NH + p) * 2;
          pre += w[r][p] * LVL + ref_mismatch(cid, seed, DWM) - ref_mismatch(cid + 1, seed, DWM);
        end
      sa[p] = ref_sense(pre, pol[p], p, seed, OSM);
      if (pre >= -OSM && pre <= OSM) begin if (sa[p]) n_tie1++; else n_tie0++; end
      if (pre % LVL != 0) n_cellerr++;
    end
    for (int i = 0; i < NH; i++) begin
      if (sa[2*i]) n_keep++; else n_load++;
      h[i] = sa[2*i] ? h[i] : sa[2*i+1];
    end
  endtask

  task automatic ref_frame(input logic signed [NI-1:0][7:0] x, input bit first);
    bit [4*NH-1:0] pol;
    for (int w = 0; w < 16; w++) begin
      prng_s = ref_xorshift(prng_s);
      pol[w*32 +: 32] = prng_s;
    end
    if (first) begin m_h1 = '0; m_h2 = '0; end
    for (int j = 0; j < NH; j++) begin
      int s;
      s = 0;
      for (int k = 0; k < NI; k++) s += int'($signed(x[k])) * win[k][j];
      m_h0[j] = (s > 0);
    end
    ref_layer(wl1, m_h0, pol[2*NH-1:0], 1, m_h1);
    ref_layer(wl2, m_h1, pol[4*NH-1:2*NH], 2, m_h2);
  endtask

  // ---------------- stimulus ----------------
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

  int res_seen = 0;
  always @(posedge clk) if (rst_n && result_valid) res_seen++;
  always @(posedge clk) if (rst_n && mfcc_valid && !mfcc_ready) n_stall++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int lens [3] = '{5, 20, 125};
    mfcc = '0; prog_sel = pim_pkg::PROG_WIN; prog_row = '0; prog_w = '0;
    m_h1 = '0; m_h2 = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    program_rows(pim_pkg::PROG_WIN,  NI,   NH);
    program_rows(pim_pkg::PROG_L1,   2*NH, 2*NH);
    program_rows(pim_pkg::PROG_L2,   2*NH, 2*NH);
    program_rows(pim_pkg::PROG_WOUT, NH,   NC);

    for (int u = 0; u < 3; u++) begin
      logic signed [NI-1:0][7:0] xs [125];
      for (int f = 0; f < lens[u]; f++)
        for (int k = 0; k < NI; k++) xs[f][k] = 8'($urandom);
      for (int f = 0; f < lens[u]; f++) begin
        int lat;
        mfcc       = xs[f];
        mfcc_first = (f == 0);
        mfcc_last  = (f == lens[u] - 1);
        mfcc_valid = 1;
        if (f == 0) n_clear++;
        do @(negedge clk); while (!mfcc_ready);
        @(posedge clk); #1;                    // accepted on this edge
        mfcc_valid = 0;
        ref_frame(xs[f], f == 0);
        lat = 0;
        // for odd frames the next frame is offered at once, so it stalls
        if (f % 2 == 1 && f != lens[u] - 1) begin
          mfcc       = xs[f+1];
          mfcc_first = 1'b0;
          mfcc_last  = (f + 1 == lens[u] - 1);
          mfcc_valid = 1;
        end
        do begin @(posedge clk); #1; lat++; end while (!mfcc_ready && lat < 1000);
        checks++;
        if (lat != ((f == lens[u] - 1) ? NI + 9 + NH + 2 : NI + 9)) begin
          failures++;
          $display("FAIL frame latency %0d", lat);
        end
        checks += 3;
        if (dut.u_in.h0 != m_h0) begin failures++; $display("FAIL u%0d f%0d H0", u, f); end
        if (dut.u_l1.h  != m_h1) begin failures++; $display("FAIL u%0d f%0d H1", u, f); end
        if (dut.u_l2.h  != m_h2) begin failures++; $display("FAIL u%0d f%0d H2", u, f); end
        if (f == lens[u] - 1) begin
          int s [NC];
          int best, rl;
          real z;
          // the softmax follows the sequencer: result N_CLS + 1 clocks later
          rl = 0;
          while (!result_valid && rl < 100) begin @(posedge clk); #1; rl++; end
          checks++;
          if (rl != NC + 1) begin failures++; $display("FAIL result latency %0d", rl); end
          best = 0;
          z = 0.0;
          for (int j = 0; j < NC; j++) begin
            s[j] = 0;
            for (int k = 0; k < NH; k++) if (m_h2[k]) s[j] += wout[k][j];
            if (s[j] > s[best]) best = j;
            checks++;
            if (int'($signed(logits[j])) != s[j]) begin failures++; $display("FAIL logit %0d", j); end
          end
          checks++;
          if (int'(class_idx) != best) begin failures++; $display("FAIL class %0d", class_idx); end
          for (int j = 0; j < NC; j++) z += $exp(real'(s[j] - s[best]) / 2.0);
          for (int j = 0; j < NC; j++) begin
            real pv;
            pv = $exp(real'(s[j] - s[best]) / 2.0) / z * 65536.0;
            if (pv > 65535.0) pv = 65535.0;
            checks++;
            if (real'(probs[j]) - pv > 3.0 || pv - real'(probs[j]) > 3.0) begin failures++; $display("FAIL prob %0d: %0d vs %f", j, probs[j], pv); end
          end
          n_result++;
          $display("utterance %0d (%0d frames): class %0d, score %0d, p=%0d/65536",
                   u, lens[u], class_idx, s[best], probs[best]);
          @(posedge clk); #1;                  // let the result pulse be counted
        end
      end
    end

    $display("mechanisms: stalls=%0d clears=%0d keeps=%0d loads=%0d ties->1=%0d ties->0=%0d results=%0d",
             n_stall, n_clear, n_keep, n_load, n_tie1, n_tie0, n_result);
    checks++; if (n_stall  == 0) failures++;
    checks++; if (n_clear  == 0) failures++;
    checks++; if (n_keep   == 0) failures++;
    checks++; if (n_load   == 0) failures++;
    checks++; if (n_tie1   == 0) failures++;
    checks++; if (n_tie0   == 0) failures++;
    checks++; if (n_result == 0 || res_seen != n_result) begin failures++; $display("FAIL results %0d seen %0d", n_result, res_seen); end   // results only after last frames
    checks++; if (n_cellerr == 0) failures++;
    $display("pre-activations off the level grid (cell errors): %0d", n_cellerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
