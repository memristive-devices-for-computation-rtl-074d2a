// Input symbol decoder of the automata processor.
//
// Turns the W-bit input symbol into the one-hot Input Vector i of 2^W
// elements: exactly one word line of the STE array is raised, the one that
// belongs to the symbol, while en is high; with en low no word line is
// raised. Purely combinational. The decoder itself and its 2^W outputs follow
// the paper; the enable is this design's own addition so that no word line
// is active between symbols.
module symbol_decoder #(
  parameter int unsigned W = 8
) (
  input  logic            en,
  input  logic [W-1:0]    sym,
  output logic [2**W-1:0] wl
);
  always_comb begin
    wl = '0;
    if (en) wl[sym] = 1'b1;
  end
endmodule
