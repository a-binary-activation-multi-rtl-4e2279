// prng: pseudo-random bit source for the sense-amp offset-polarity switches.
//
// Every timestep each sense-amp needs a fresh random polarity bit. The
// generator is a 32-bit xorshift (shifts 13, 17, 5) whose state is stepped
// NBITS/32 times combinationally per 'step'; the successive states are
// concatenated into 'bits'. Only the need for a pseudo-random polarity per
// sense-amp per timestep comes from the published design; the xorshift
// structure and the seed are this implementation's choices.
//
// Timing: 'bits' changes on the clock edge where step is high and is stable
// otherwise. rst_n (asynchronous, active low) loads SEED.
module prng #(
  parameter int          NBITS = 512,
  parameter logic [31:0] SEED  = 32'h2545_F491
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  output logic [NBITS-1:0] bits
);
  localparam int WORDS = (NBITS + 31) / 32;

  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  logic [31:0]            state;
  logic [WORDS*32-1:0]    next_bits;
  logic [31:0]            next_state;

  always_comb begin
    logic [31:0] s;
    s = state;
    for (int w = 0; w < WORDS; w++) begin
      s = xorshift32(s);
      next_bits[w*32 +: 32] = s;
    end
    next_state = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= SEED;
      bits  <= '0;
    end else if (step) begin
      state <= next_state;
      bits  <= next_bits[NBITS-1:0];
    end
  end
endmodule
