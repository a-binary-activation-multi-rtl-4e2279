// sense_amp_bank: behavioural model of the bitline sense-amps of one PIM
// array, with their offset-polarity switches.
//
// Not synthesizable logic: it stands for N clocked StrongArm-type
// comparators. Sense-amp i compares the differential bitline signal of
// column pair i against zero. Two non-idealities are modelled:
//   N_OS    - input-referred offset, fixed for each sense-amp after
//             fabrication: a pseudo-random value in [-OS_MAX, OS_MAX] units.
//   N_white - thermal and shot noise, a fresh zero-mean sample per
//             comparison with standard deviation WHITE_SIGMA units (sum of
//             twelve uniform draws). 0 disables it.
// The polarity switches in front of the comparator add the offset with a
// chosen sign: polarity[i] = 0 (switch set P0) gives bl + N_OS, 1 (P1) gives
// bl - N_OS. Driving the polarity from a random source turns the static offset
// into zero-mean noise. The decision is 1 when the total is above zero.
// Offset and noise distributions are choices of this model; the published
// design derives them from circuit simulation.
//
// Timing: sa_out is registered on the clock edge where sense_en is high and
// held until the next one.
module sense_amp_bank #(
  parameter int N           = 256,
  parameter int OS_MAX      = 8,
  parameter int WHITE_SIGMA = 0,
  parameter int SEED        = 1
) (
  input  logic                     clk,
  input  logic                     sense_en,
  input  pim_pkg::bl_t [N-1:0]     bl_diff,
  input  logic [N-1:0]             polarity,
  output logic [N-1:0]             sa_out
);
  import pim_pkg::*;

  // One draw of white noise: twelve uniforms in [-U, U] have variance
  // 12 * U^2 / 3 = 4 U^2, so U = sigma / 2.
  function automatic int white_sample();
    int s;
    int u;
    s = 0;
    u = WHITE_SIGMA / 2 + (WHITE_SIGMA % 2);
    if (WHITE_SIGMA > 0)
      for (int j = 0; j < 12; j++)
        s += int'($urandom % 32'(2 * u + 1)) - u;
    return s;
  endfunction

  always_ff @(posedge clk) begin
    if (sense_en) begin
      for (int i = 0; i < N; i++) begin
        int os;
        int total;
        os    = mismatch(i, SEED, OS_MAX);
        total = int'(bl_diff[i]) + (polarity[i] ? -os : os) + white_sample();
        sa_out[i] <= (total > 0);
      end
    end
  end
endmodule
