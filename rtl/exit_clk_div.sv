// exit_clk_div -- half-rate strobe for the exit nodes.
//
// Characters and numbers alternate at the forest input, so the numbers reach
// the exit nodes, m clocks after they enter, on every second clock only. The
// paper uses this to run the exit nodes from a divided clock. Here a toggle
// flip-flop divides by two and drives a clock enable instead of a second clock.
//
// The toggle 'ph' follows the input slot: 0 in a character slot, 1 in a number
// slot. 'sync' is high in the clock in which the first character of a string
// enters; the next slot is a number slot, so ph is loaded with 1. Between
// strings the trees are flushed with M '-' tokens, so for odd M a new string
// starts on the other phase, hence the resynchronisation. A number that
// entered M clocks ago is at the exit nodes when the slot parity M clocks back
// was 1, which is en = ph ^ M[0]. Stalls insert '-' in pairs, which keeps the
// parity. When the resync changes the phase (after reset or idle, or for odd
// M), the strobe repeats or skips once; the trees have just been flushed, so
// no number is at the exit nodes then. The phase choice and the resync are
// this design's own.
module exit_clk_div #(
  parameter int M = 3     // motif length (tree depth)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sync,      // first character of a string is entering
  output logic en         // exit-node clock enable, every second clock
);

  localparam logic M_ODD = 1'(M % 2);

  logic ph;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ph <= 1'b0;
    else if (sync) ph <= 1'b1;
    else           ph <= ~ph;
  end

  assign en = ph ^ M_ODD;

endmodule
