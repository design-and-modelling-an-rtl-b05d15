// mux_switch_block: one stage of an arbiter PUF.
//
// Two 2-input multiplexers share one select line, the challenge bit c.
// With c = 0 each racing signal goes straight on (upper to upper, lower to
// lower); with c = 1 the two signals swap paths. Purely combinational, no
// clock. The two-multiplexer structure with a common select is the
// published one; the input order (0 = straight, 1 = crossed) is read off
// the numerals and lines of the arbiter PUF schematic.
`timescale 1ps / 1ps
module mux_switch_block (
  input  logic c,        // challenge bit, common select
  input  logic in_top,   // upper signal from the previous stage
  input  logic in_bot,   // lower signal from the previous stage
  output logic out_top,  // upper multiplexer output
  output logic out_bot   // lower multiplexer output
);

  // Upper multiplexer: input 0 = upper signal, input 1 = lower signal.
  assign out_top = c ? in_bot : in_top;
  // Lower multiplexer: input 0 = lower signal, input 1 = upper signal.
  assign out_bot = c ? in_top : in_bot;

endmodule
