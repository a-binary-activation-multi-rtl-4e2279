// output_fc: the output fully-connected layer and class decision.
//
// After the last timestep the final hidden state of the second GRU layer,
// H^2<t_max>, is multiplied by Wout (128 x 12) to give one score per class.
// The published network follows this with a 12-way softmax; since softmax
// preserves order, the hardware reports the scores and their argmax (ties
// to the lower index) instead of probabilities. The datapath is this
// design's choice: Wout is a register file of 7-level codes and N_CLS
// accumulators take one input row per clock, adding the row's codes when the
// hidden bit is 1.
//
// Interface and timing:
//   prog_en  - writes row prog_row of Wout (N_CLS codes) in one clock.
//   start    - captures h; accumulation runs for the next N_IN clocks.
//   done     - one-cycle pulse when logits and class_idx are valid,
//              N_IN clocks after the start edge. start is ignored while
//              busy.
module output_fc #(
  parameter int N_IN  = pim_pkg::N_HID,
  parameter int N_CLS = pim_pkg::N_CLS,
  parameter int L_W   = 12
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               prog_en,
  input  logic [$clog2(N_IN)-1:0]            prog_row,
  input  pim_pkg::wcode_t [N_CLS-1:0]        prog_w,
  input  logic                               start,
  input  logic [N_IN-1:0]                    h,
  output logic                               busy,
  output logic                               done,
  output logic signed [N_CLS-1:0][L_W-1:0]   logits,
  output logic [$clog2(N_CLS)-1:0]           class_idx
);
  import pim_pkg::*;

  typedef logic signed [L_W-1:0] lg_t;

  wcode_t [N_CLS-1:0]        wout [N_IN];
  logic [N_IN-1:0]           h_q;
  lg_t [N_CLS-1:0]           acc, acc_next;
  logic [$clog2(N_IN)-1:0]   k;
  logic [$clog2(N_CLS)-1:0]  best;

  always_ff @(posedge clk) begin
    if (prog_en) wout[prog_row] <= prog_w;
  end

  // Next accumulator values and the argmax over them.
  always_comb begin
    for (int j = 0; j < N_CLS; j++)
      acc_next[j] = acc[j] + (h_q[k] ? lg_t'(wout[k][j]) : lg_t'(0));
    best = '0;
    for (int j = 1; j < N_CLS; j++)
      if (acc_next[j] > acc_next[best]) best = ($clog2(N_CLS))'(j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      k         <= '0;
      acc       <= '0;
      h_q       <= '0;
      logits    <= '0;
      class_idx <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          k    <= '0;
          acc  <= '0;
          h_q  <= h;
        end
      end else begin
        acc <= acc_next;
        if (int'(k) == N_IN - 1) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          logits    <= acc_next;
          class_idx <= best;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end
endmodule
