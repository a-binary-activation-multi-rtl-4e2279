// input_fc: the input fully-connected layer that encodes one MFCC vector into
// the 128-bit binary vector H^0<t> fed to the first GRU layer.
//
// H^0_j = 1 when sum_k x_k * Win[k][j] > 0, else 0 (binary step, no bias).
// The published design gives only the layer's shape (40 x 128) and that its
// output is binary; the datapath here is this design's simplest choice: Win
// sits in a register file of 7-level codes, and N_OUT accumulators take one
// MFCC coefficient per clock, so an encoding takes N_IN clocks.
//
// Interface and timing:
//   prog_en      - writes row prog_row of Win (N_OUT codes) in one clock.
//   start        - captures x; accumulation runs for the next N_IN clocks.
//   done         - one-cycle pulse when h0 holds the new encoding, N_IN
//                  clocks after the start edge. start is ignored while busy.
module input_fc #(
  parameter int N_IN   = pim_pkg::N_MFCC,
  parameter int N_OUT  = pim_pkg::N_HID,
  parameter int X_BITS = pim_pkg::X_BITS
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                prog_en,
  input  logic [$clog2(N_IN)-1:0]             prog_row,
  input  pim_pkg::wcode_t [N_OUT-1:0]         prog_w,
  input  logic                                start,
  input  logic signed [N_IN-1:0][X_BITS-1:0]  x,
  output logic                                busy,
  output logic                                done,
  output logic [N_OUT-1:0]                    h0
);
  import pim_pkg::*;

  localparam int ACC_W = X_BITS + W_BITS + $clog2(N_IN) + 1;
  typedef logic signed [ACC_W-1:0] acc_t;

  wcode_t [N_OUT-1:0]              win [N_IN];
  logic signed [N_IN-1:0][X_BITS-1:0] x_q;
  acc_t [N_OUT-1:0]                acc;
  logic [$clog2(N_IN)-1:0]         k;

  always_ff @(posedge clk) begin
    if (prog_en) win[prog_row] <= prog_w;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      k    <= '0;
      acc  <= '0;
      x_q  <= '0;
      h0   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          k    <= '0;
          acc  <= '0;
          x_q  <= x;
        end
      end else begin
        for (int j = 0; j < N_OUT; j++)
          acc[j] <= acc[j] + acc_t'($signed(x_q[k])) * acc_t'(win[k][j]);
        if (int'(k) == N_IN - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
          for (int j = 0; j < N_OUT; j++)
            h0[j] <= (acc[j] + acc_t'($signed(x_q[k])) * acc_t'(win[k][j])) > 0;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end
endmodule
