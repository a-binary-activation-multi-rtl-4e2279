// twd_pim_top: trigger-word detection accelerator built around two
// binary-activation, multi-level-weight GRU layers computed in eNVM arrays.
//
// Dataflow per 8 ms timestep t:
//   MFCC x<t> (40 words) -> input_fc -> H^0<t> (128 bits)
//   H^0<t>, H^1<t-1> -> gru_layer 1 -> H^1<t>
//   H^1<t>, H^2<t-1> -> gru_layer 2 -> H^2<t>
// and after the last frame of an utterance H^2<t_max> -> output_fc -> scores
// and argmax class -> softmax_unit -> 12 probabilities.
// Inside each GRU layer the matrix-vector products happen in the MLC array
// and are resolved by sense-amps, so everything outside the arrays is
// single-bit digital logic. One prng gives all 512 sense-amps a fresh offset
// polarity every timestep. The sizes and the dataflow follow the published
// network; the control, the frame handshake, the weight-programming port and
// the digital FC datapaths are this design's choices.
//
// Interface:
//   Weight programming - while prog_en is high, row prog_row of the memory
//     chosen by prog_sel is written with prog_w (one row per clock):
//       PROG_WIN  rows 0..39,  codes prog_w[127:0]
//       PROG_L1/2 rows 0..255, codes prog_w[255:0], pair 2i = Wg col i,
//                 2i+1 = Wc col i; rows 0..127 multiply H^l<t-1>,
//                 rows 128..255 multiply H^{l-1}<t>
//       PROG_WOUT rows 0..127, codes prog_w[11:0]
//     Codes are signed 3-bit, -3..+3. Programming must not overlap inference.
//   MFCC frames - valid/ready; mfcc_first starts an utterance (hidden states
//     cleared), mfcc_last ends it. mfcc_ready returns N_IN + 9 clocks after
//     a frame is accepted, N_IN + 9 + N_HID + 2 after a last frame.
//   Result - result_valid pulses with logits (class scores), class_idx
//     (their argmax) and probs (softmax, 16 fractional bits), N_CLS + 1
//     clocks after the sequencer has finished the last frame.
// Analog parameters: OS_MAX (sense-amp offset bound), DW_MAX (cell error
// bound), WHITE_SIGMA (sense-amp white noise), in units of 1/16 cell level.
module twd_pim_top #(
  parameter int          N_IN        = pim_pkg::N_MFCC,
  parameter int          N_HID       = pim_pkg::N_HID,
  parameter int          N_CLS       = pim_pkg::N_CLS,
  parameter int          OS_MAX      = 8,
  parameter int          DW_MAX      = 0,
  parameter int          WHITE_SIGMA = 0,
  parameter logic [31:0] PRNG_SEED   = 32'h2545_F491
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // weight programming
  input  logic                                 prog_en,
  input  pim_pkg::prog_sel_e                   prog_sel,
  input  logic [$clog2(2*N_HID)-1:0]           prog_row,
  input  pim_pkg::wcode_t [2*N_HID-1:0]        prog_w,
  // MFCC frames
  input  logic                                 mfcc_valid,
  input  logic                                 mfcc_first,
  input  logic                                 mfcc_last,
  input  logic signed [N_IN-1:0][pim_pkg::X_BITS-1:0] mfcc,
  output logic                                 mfcc_ready,
  // classification
  output logic                                 result_valid,
  output logic signed [N_CLS-1:0][11:0]        logits,
  output logic [$clog2(N_CLS)-1:0]             class_idx,
  output logic [N_CLS-1:0][15:0]               probs
);
  import pim_pkg::*;

  logic clear, prng_step;
  logic fc_start, fc_done, fc_busy;
  logic l1_step, l1_done, l2_step, l2_done;
  logic out_start, out_done, out_busy;
  logic scores_valid, sm_busy;
  logic [N_HID-1:0]   h0, h1, h2;
  logic [4*N_HID-1:0] polarity;

  twd_sequencer u_seq (
    .clk, .rst_n,
    .frame_valid (mfcc_valid), .frame_first (mfcc_first), .frame_last (mfcc_last),
    .frame_ready (mfcc_ready),
    .clear, .prng_step,
    .fc_start, .fc_done,
    .l1_step, .l1_done,
    .l2_step, .l2_done,
    .out_start, .out_done,
    .result_valid (scores_valid)
  );

  prng #(.NBITS (4 * N_HID), .SEED (PRNG_SEED)) u_prng (
    .clk, .rst_n, .step (prng_step), .bits (polarity)
  );

  input_fc #(.N_IN (N_IN), .N_OUT (N_HID), .X_BITS (X_BITS)) u_in (
    .clk, .rst_n,
    .prog_en  (prog_en && prog_sel == PROG_WIN),
    .prog_row ($clog2(N_IN)'(prog_row)),
    .prog_w   (prog_w[N_HID-1:0]),
    .start    (fc_start),
    .x        (mfcc),
    .busy     (fc_busy),
    .done     (fc_done),
    .h0
  );

  gru_layer #(
    .N (N_HID), .OS_MAX (OS_MAX), .DW_MAX (DW_MAX),
    .WHITE_SIGMA (WHITE_SIGMA), .SEED (1)
  ) u_l1 (
    .clk, .rst_n,
    .prog_en  (prog_en && prog_sel == PROG_L1),
    .prog_row, .prog_w,
    .clear,
    .step     (l1_step),
    .x        (h0),
    .polarity (polarity[2*N_HID-1:0]),
    .done     (l1_done),
    .h        (h1)
  );

  gru_layer #(
    .N (N_HID), .OS_MAX (OS_MAX), .DW_MAX (DW_MAX),
    .WHITE_SIGMA (WHITE_SIGMA), .SEED (2)
  ) u_l2 (
    .clk, .rst_n,
    .prog_en  (prog_en && prog_sel == PROG_L2),
    .prog_row, .prog_w,
    .clear,
    .step     (l2_step),
    .x        (h1),
    .polarity (polarity[4*N_HID-1:2*N_HID]),
    .done     (l2_done),
    .h        (h2)
  );

  output_fc #(.N_IN (N_HID), .N_CLS (N_CLS), .L_W (12)) u_out (
    .clk, .rst_n,
    .prog_en  (prog_en && prog_sel == PROG_WOUT),
    .prog_row ($clog2(N_HID)'(prog_row)),
    .prog_w   (prog_w[N_CLS-1:0]),
    .start    (out_start),
    .h        (h2),
    .busy     (out_busy),
    .done     (out_done),
    .logits,
    .class_idx
  );

  // Softmax over the scores; the next scores are at least one frame away,
  // so the output FC holds them while the softmax runs.
  softmax_unit #(.N (N_CLS), .S_W (12), .PROB_BITS (16)) u_smax (
    .clk, .rst_n,
    .start   (scores_valid),
    .scores  (logits),
    .max_idx (class_idx),
    .busy    (sm_busy),
    .done    (result_valid),
    .probs
  );

  // A frame offered but not yet accepted must stay unchanged.
  a_frame_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mfcc_valid && !mfcc_ready) |=> $stable(mfcc) && $stable(mfcc_last) && $stable(mfcc_first));
  // The sequencer only starts a sub-block that is idle.
  a_fc_idle: assert property (@(posedge clk) disable iff (!rst_n)
    fc_start |-> !fc_busy);
  a_out_idle: assert property (@(posedge clk) disable iff (!rst_n)
    out_start |-> !out_busy);
  a_smax_idle: assert property (@(posedge clk) disable iff (!rst_n)
    out_done |-> !sm_busy);
  // Weights are not rewritten while a frame is being processed.
  a_no_prog_in_flight: assert property (@(posedge clk) disable iff (!rst_n)
    prog_en |-> mfcc_ready);
endmodule
