// tb_mlc_weight_encoder: checks every 3-bit weight code against the 7-level
// mapping table (positive weight on the positive cell, negative on the
// negative cell, zero on neither; -4 saturates to level 3).
module tb_mlc_weight_encoder;
  int checks = 0, failures = 0;
  logic signed [2:0] w;
  logic [1:0] lp, ln;

  mlc_weight_encoder dut (.w (w), .lvl_pos (lp), .lvl_neg (ln));

  // expected (neg, pos) per code -4..3
  int exp_neg [8] = '{3, 3, 2, 1, 0, 0, 0, 0};
  int exp_pos [8] = '{0, 0, 0, 0, 0, 1, 2, 3};

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -4; v <= 3; v++) begin
      w = 3'(v);
      #1;
      checks++;
      if (int'(lp) != exp_pos[v+4] || int'(ln) != exp_neg[v+4]) begin
        failures++;
        $display("FAIL w=%0d pos=%0d neg=%0d", v, lp, ln);
      end
      // the differential current equals the weight for in-range codes
      if (v > -4) begin
        checks++;
        if (int'(lp) - int'(ln) != v) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
