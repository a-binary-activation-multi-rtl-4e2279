// twd_sequencer: timestep controller of the trigger-word detector.
//
// For every MFCC frame it runs the input FC, then GRU layer 1, then GRU
// layer 2, one after the other, and steps the polarity PRNG once so that
// each sense-amp gets a fresh offset polarity per timestep. A frame marked
// 'first' clears both hidden states before layer 1 runs; after a frame marked
// 'last' the output FC classifies H^2 and result_valid pulses. The order of
// operations follows the network's dataflow; the FSM, the valid/ready frame
// handshake and the first/last marking are this design's own.
//
// Interface: frame_ready is high in IDLE only; a frame is accepted on a clock
// edge with frame_valid && frame_ready. Sub-blocks are started with one-cycle
// pulses and report back with one-cycle done pulses. fc_start is the
// accept condition itself (combinational), all other outputs are registered.
module twd_sequencer (
  input  logic clk,
  input  logic rst_n,
  input  logic frame_valid,
  input  logic frame_first,
  input  logic frame_last,
  output logic frame_ready,
  output logic clear,
  output logic prng_step,
  output logic fc_start,
  input  logic fc_done,
  output logic l1_step,
  input  logic l1_done,
  output logic l2_step,
  input  logic l2_done,
  output logic out_start,
  input  logic out_done,
  output logic result_valid
);
  typedef enum logic [2:0] {
    S_IDLE, S_ENC, S_L1, S_L2, S_OUT
  } state_e;

  state_e state;
  logic   last_q;
  logic   accept;

  assign frame_ready = (state == S_IDLE);
  assign accept      = frame_valid && frame_ready;
  // The input FC captures the frame on the accepting edge itself, so the
  // source may present the next frame right after the handshake.
  assign fc_start    = accept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      last_q       <= 1'b0;
      clear        <= 1'b0;
      prng_step    <= 1'b0;
      l1_step      <= 1'b0;
      l2_step      <= 1'b0;
      out_start    <= 1'b0;
      result_valid <= 1'b0;
    end else begin
      clear        <= 1'b0;
      prng_step    <= 1'b0;
      l1_step      <= 1'b0;
      l2_step      <= 1'b0;
      out_start    <= 1'b0;
      result_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (accept) begin
          last_q    <= frame_last;
          clear     <= frame_first;
          prng_step <= 1'b1;
          state     <= S_ENC;
        end
        S_ENC: if (fc_done) begin
          l1_step <= 1'b1;
          state   <= S_L1;
        end
        S_L1: if (l1_done) begin
          l2_step <= 1'b1;
          state   <= S_L2;
        end
        S_L2: if (l2_done) begin
          if (last_q) begin
            out_start <= 1'b1;
            state     <= S_OUT;
          end else begin
            state     <= S_IDLE;
          end
        end
        S_OUT: if (out_done) begin
          result_valid <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
