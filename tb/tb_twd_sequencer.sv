// tb_twd_sequencer: drives frames (some offered while the sequencer is busy,
// so they stall) and answers each start with a done pulse after a random
// delay. A scoreboard checks the order input FC -> layer 1 -> layer 2 per
// frame, that 'first' frames clear the state, that the PRNG steps once per
// frame, that only 'last' frames run the output FC and produce a result, and
// that frame_ready is low from acceptance to the end of the frame.
module tb_twd_sequencer;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic frame_valid = 0, frame_first = 0, frame_last = 0, frame_ready;
  logic clear, prng_step, fc_start, l1_step, l2_step, out_start, result_valid;
  logic fc_done, l1_done, l2_done, out_done;

  twd_sequencer dut (.*);

  // sub-block emulation: each start is answered after 1..6 clocks
  int c_fc = 0, c_l1 = 0, c_l2 = 0, c_out = 0;
  always_ff @(posedge clk) begin
    c_fc  <= fc_start  ? 1 + int'($urandom_range(5)) : (c_fc  > 0 ? c_fc  - 1 : 0);
    c_l1  <= l1_step   ? 1 + int'($urandom_range(5)) : (c_l1  > 0 ? c_l1  - 1 : 0);
    c_l2  <= l2_step   ? 1 + int'($urandom_range(5)) : (c_l2  > 0 ? c_l2  - 1 : 0);
    c_out <= out_start ? 1 + int'($urandom_range(5)) : (c_out > 0 ? c_out - 1 : 0);
  end
  assign fc_done  = (c_fc  == 1);
  assign l1_done  = (c_l1  == 1);
  assign l2_done  = (c_l2  == 1);
  assign out_done = (c_out == 1);

  // scoreboard: event log per clock
  string log_s = "";
  int n_frames = 0, n_results = 0, n_clears = 0, n_steps = 0, n_stalls = 0;
  always @(posedge clk) if (rst_n) begin
    if (result_valid) begin log_s = {log_s, "R"}; n_results++; end
    if (clear)        begin log_s = {log_s, "C"}; n_clears++; end
    if (prng_step)    begin log_s = {log_s, "P"}; n_steps++; end
    if (fc_start)     log_s = {log_s, "F"};
    if (l1_step)      log_s = {log_s, "1"};
    if (l2_step)      log_s = {log_s, "2"};
    if (out_start)    log_s = {log_s, "O"};
    if (frame_valid && !frame_ready) n_stalls++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string exp;
    exp = "";
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int u = 0; u < 6; u++) begin          // utterances
      int len;
      len = 1 + int'($urandom_range(4));
      for (int f = 0; f < len; f++) begin
        frame_valid = 1;
        frame_first = (f == 0);
        frame_last  = (f == len - 1);
        do @(negedge clk); while (!frame_ready);
        @(posedge clk); #1;
        frame_valid = 0;
        n_frames++;
        exp = {exp, (f == 0) ? "FCP" : "FP", "12", (f == len - 1) ? "OR" : ""};
        checks++;
        if (frame_ready) failures++;           // busy after acceptance
        // offer the next frame right away so that it stalls
      end
    end
    repeat (50) @(posedge clk);
    checks++;
    if (log_s != exp) begin
      failures++;
      $display("FAIL order\n got %s\n exp %s", log_s, exp);
    end
    checks++;
    if (n_results != 6 || n_clears != 6 || n_steps != n_frames) failures++;
    checks++;
    if (n_stalls == 0) failures++;
    $display("frames %0d results %0d stalls %0d", n_frames, n_results, n_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
