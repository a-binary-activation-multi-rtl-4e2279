// gru_layer: one binary-activation, multi-level-weight GRU layer computed in
// an eNVM array.
//
// The wordlines carry [H^l<t-1>, H^{l-1}<t>] (rows 0..N-1 the layer's own
// previous state, rows N..2N-1 the input from the layer below). The array
// holds Wg and Wc side by side, column pair 2i for gate i and 2i+1 for
// candidate i, so one array evaluation yields all 2N pre-activations. The
// sense-amps binarise them into g and c, and gru_logic forms
// h<t> = g ? h<t-1> : c. No DAC or ADC is involved: all signals in and out
// of the array are single bits. Row and column order follow the layout of
// the published array drawing; the three-cycle schedule is this design's.
//
// Programming: while prog_en is high, row prog_row of the array is written
// with the 2N weight codes prog_w (pair order as above), one row per clock.
//
// Timing of a timestep, counted from the clock edge where step is high:
//   edge 0  array samples the wordlines (x must be valid here)
//   edge 1  sense-amps fire, using polarity
//   edge 2  hidden state registers take h<t>
//   done is high for one cycle after edge 2, when h holds h<t>.
// step must not be raised again before done.
module gru_layer #(
  parameter int N           = pim_pkg::N_HID,
  parameter int OS_MAX      = 8,
  parameter int DW_MAX      = 0,
  parameter int WHITE_SIGMA = 0,
  parameter int SEED        = 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          prog_en,
  input  logic [$clog2(2*N)-1:0]        prog_row,
  input  pim_pkg::wcode_t [2*N-1:0]     prog_w,
  input  logic                          clear,
  input  logic                          step,
  input  logic [N-1:0]                  x,
  input  logic [2*N-1:0]                polarity,
  output logic                          done,
  output logic [N-1:0]                  h
);
  import pim_pkg::*;

  localparam int ROWS  = 2 * N;
  localparam int PAIRS = 2 * N;

  // ---- programming path: weight codes to cell levels ----
  lvl_t [PAIRS-1:0] prog_pos, prog_neg;
  for (genvar p = 0; p < PAIRS; p++) begin : g_enc
    mlc_weight_encoder u_enc (
      .w       (prog_w[p]),
      .lvl_pos (prog_pos[p]),
      .lvl_neg (prog_neg[p])
    );
  end

  // ---- wordline drivers: [H^l<t-1>, H^{l-1}<t>] ----
  logic [ROWS-1:0] wl;
  assign wl = {x, h};

  // ---- schedule ----
  logic eval_en, sense_en, update;
  assign eval_en = step;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sense_en <= 1'b0;
      update   <= 1'b0;
      done     <= 1'b0;
    end else begin
      sense_en <= eval_en;
      update   <= sense_en;
      done     <= update;
    end
  end

  // ---- array and sense-amps ----
  bl_t [PAIRS-1:0]  bl_diff;
  logic [PAIRS-1:0] sa_out;

  mlc_array #(
    .ROWS (ROWS), .PAIRS (PAIRS), .CELL_BITS (CELL_BITS),
    .DW_MAX (DW_MAX), .SEED (SEED)
  ) u_array (
    .clk, .prog_en, .prog_row,
    .prog_pos, .prog_neg,
    .eval_en, .wl, .bl_diff
  );

  sense_amp_bank #(
    .N (PAIRS), .OS_MAX (OS_MAX), .WHITE_SIGMA (WHITE_SIGMA), .SEED (SEED)
  ) u_sa (
    .clk, .sense_en, .bl_diff, .polarity, .sa_out
  );

  // ---- GRU logic ----
  logic [N-1:0] g, c;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      g[i] = sa_out[2*i];
      c[i] = sa_out[2*i+1];
    end
  end

  gru_logic #(.N (N)) u_logic (
    .clk, .rst_n, .clear, .update, .g, .c, .h
  );

  // A new timestep may only start once the previous one has finished.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    step |-> !(sense_en || update));
endmodule
