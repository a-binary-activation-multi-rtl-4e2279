// softmax_unit: 12-way softmax over the output FC scores.
//
// p_j = exp(s_j / S) / sum_k exp(s_k / S), where s_j are the integer class
// scores (units of one weight step, alpha/3) and S = SCORE_PER_NAT is the
// number of score units per natural-log unit. S depends on the output
// layer's clipping range, which the hardware does not know, so it is a
// parameter. The computation subtracts the maximum score first, so every
// exponent is exp(-d / S) with d >= 0. A table holds these values for
// d = 0..DMAX, each rounded to 16 fractional bits and computed at elaboration
// with $exp. Larger d gives 0. The N exponentials are summed, then one
// division per clock gives p_j with PROB_BITS fractional bits, truncated.
// The output layer followed by a softmax comes from the published network;
// the fixed-point format, the table and the serial divider are this
// design's choices.
//
// Interface and timing: 'start' captures the scores (and their argmax
// index 'max_idx', which the output FC already provides). probs is valid
// with 'done', N clocks after the start edge. start is ignored while
// busy.
module softmax_unit #(
  parameter int  N             = pim_pkg::N_CLS,
  parameter int  S_W           = 12,
  parameter int  PROB_BITS     = 16,
  parameter int  SCORE_PER_NAT = 2,
  parameter int  DMAX          = 63
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic signed [N-1:0][S_W-1:0]  scores,
  input  logic [$clog2(N)-1:0]          max_idx,
  output logic                          busy,
  output logic                          done,
  output logic [N-1:0][PROB_BITS-1:0]   probs
);
  localparam int E_BITS   = 17;                       // exp(0) = 2^16 needs 17 bits
  localparam int SUM_BITS = E_BITS + $clog2(N) + 1;
  localparam int NUM_BITS = E_BITS + PROB_BITS;

  typedef logic [E_BITS-1:0] e_t;

  function automatic e_t exp_entry(input int d);
    real v;
    v = $exp(-real'(d) / real'(SCORE_PER_NAT)) * 65536.0;
    return e_t'($rtoi(v + 0.5));
  endfunction

  typedef e_t lut_t [DMAX+1];
  function automatic lut_t make_lut();
    lut_t t;
    for (int d = 0; d <= DMAX; d++) t[d] = exp_entry(d);
    return t;
  endfunction
  localparam lut_t EXP_LUT = make_lut();

  e_t [N-1:0]              e_q;
  logic [SUM_BITS-1:0]     sum_q;
  logic [$clog2(N+1)-1:0]  j;

  // exponentials of the captured scores relative to their maximum
  e_t [N-1:0]              e_in;
  logic [SUM_BITS-1:0]     sum_in;
  always_comb begin
    logic signed [S_W:0] smax;
    smax   = (S_W+1)'($signed(scores[max_idx]));
    sum_in = '0;
    for (int k = 0; k < N; k++) begin
      logic signed [S_W:0] d;
      d = smax - (S_W+1)'($signed(scores[k]));
      e_in[k] = (d >= 0 && int'(d) <= DMAX) ? EXP_LUT[int'(d)] : '0;
      sum_in  = sum_in + SUM_BITS'(e_in[k]);
    end
  end

  logic [NUM_BITS-1:0] quot;
  always_comb begin
    logic [NUM_BITS-1:0] num;
    num  = NUM_BITS'(e_q[j[$clog2(N)-1:0]]) << PROB_BITS;
    quot = num / NUM_BITS'(sum_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      j     <= '0;
      e_q   <= '0;
      sum_q <= SUM_BITS'(1);
      probs <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          j     <= '0;
          e_q   <= e_in;
          sum_q <= sum_in;
        end
      end else begin
        probs[j[$clog2(N)-1:0]] <= (quot >= NUM_BITS'(1) << PROB_BITS)
                                   ? '1 : PROB_BITS'(quot);
        if (int'(j) == N - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          j <= j + 1'b1;
        end
      end
    end
  end
endmodule
