// tb_gru_layer: a reduced layer (N = 8, 16 rows x 16 column pairs) with
// sense-amp offsets and cell errors. Random weights are programmed row by
// row, then random inputs are run for many timesteps and the hidden state is
// compared after every step with a model of the array, the sense-amps and
// the GRU update. Checks the timestep latency (done two clocks after the
// step edge) and counts gate-keeps, candidate loads and offset-decided ties.
module tb_gru_layer;
  import tb_ref_pkg::*;
  localparam int N = 8, R = 2 * N, P = 2 * N;
  localparam int OSM = 8, DWM = 2, SEED = 4;
  int checks = 0, failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, prog_en = 0, clear = 0, step = 0;
  logic [$clog2(R)-1:0] prog_row = '0;
  pim_pkg::wcode_t [P-1:0] prog_w;
  logic [N-1:0] x, h, hm;
  logic [P-1:0] pol;
  logic done;

  gru_layer #(.N (N), .OS_MAX (OSM), .DW_MAX (DWM), .WHITE_SIGMA (0), .SEED (SEED)) dut (
    .clk, .rst_n, .prog_en, .prog_row, .prog_w, .clear, .step, .x,
    .polarity (pol), .done, .h);

  int wt [R][P];
  int kept = 0, loaded = 0, ties = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0; pol = '0; hm = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < R; r++) begin
      for (int p = 0; p < P; p++) begin
        wt[r][p] = int'($urandom_range(6)) - 3;
        if ($urandom_range(2) == 0) wt[r][p] = 0;   // sparse: more ties
        prog_w[p] = 3'(wt[r][p]);
      end
      prog_row = 4'(r);
      prog_en  = 1;
      @(posedge clk); #1;
    end
    prog_en = 0;
    for (int t = 0; t < 300; t++) begin
      int lat;
      logic [R-1:0] wl;
      logic [P-1:0] sa;
      if (t % 50 == 0) begin
        clear = 1; @(posedge clk); #1; clear = 0; hm = '0;
      end
      x   = N'($urandom);
      pol = P'($urandom);
      wl  = {x, hm};
      for (int p = 0; p < P; p++) begin
        int pre;
        pre = 0;
        for (int r = 0; r < R; r++)
          if (wl[r]) begin
            int cid;
            cid = (r * P + p) * 2;
            pre += wt[r][p] * LVL + ref_mismatch(cid, SEED, DWM) - ref_mismatch(cid + 1, SEED, DWM);
          end
        if (pre >= -OSM && pre <= OSM) ties++;
        sa[p] = ref_sense(pre, pol[p], p, SEED, OSM);
      end
      for (int i = 0; i < N; i++) begin
        if (sa[2*i]) kept++; else loaded++;
        hm[i] = sa[2*i] ? hm[i] : sa[2*i+1];
      end
      step = 1;
      @(posedge clk); #1;
      step = 0;
      lat = 0;
      while (!done && lat < 20) begin @(posedge clk); #1; lat++; end
      checks++;
      if (lat != 2) begin failures++; $display("FAIL latency %0d", lat); end
      checks++;
      if (h != hm) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d h=%b exp=%b", t, h, hm);
      end
    end
    $display("gate keeps %0d, candidate loads %0d, near-zero pre-activations %0d", kept, loaded, ties);
    checks++;
    if (kept == 0 || loaded == 0 || ties == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
