// gru_logic: the digital part of a binary GRU layer, one multiplexer and one
// hidden-state flip-flop per neuron.
//
// With binary activations the GRU update h<t> = g*h<t-1> + (1-g)*c reduces to
// a 2:1 multiplexer: a gate bit of 1 keeps the stored state, 0 loads the
// candidate bit. There is no reset gate. The hidden state starts at zero
// after reset or 'clear' (this design's choice of initial state).
//
// Timing: h takes its new value on the clock edge where update is high;
// clear has priority over update. rst_n is asynchronous, active low.
module gru_logic #(
  parameter int N = pim_pkg::N_HID
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         update,
  input  logic [N-1:0] g,
  input  logic [N-1:0] c,
  output logic [N-1:0] h
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      h <= '0;
    else if (clear)  h <= '0;
    else if (update) h <= (g & h) | (~g & c);
  end
endmodule
