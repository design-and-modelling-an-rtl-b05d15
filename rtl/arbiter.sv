// arbiter: the decision element at the end of an arbiter PUF.
//
// A D flip-flop whose data input is the end of the upper path and whose
// clock is the end of the lower path. When the lower edge arrives the
// flip-flop captures the upper path: 1 if the upper edge got there first,
// 0 if it had not yet arrived. The bit is held until the next rising edge
// of the lower path, i.e. until the next enable pulse. The D flip-flop as
// arbiter is the published design; which path drives D and which the
// clock, and the absence of a reset, are this design's choices. Setup/hold
// metastability of a real flip-flop is not modelled: an exact tie is
// resolved by the simulator's event order.
`timescale 1ps / 1ps
module arbiter (
  input  logic d,    // upper path
  input  logic clk,  // lower path
  output logic q     // response bit
);

  always_ff @(posedge clk) begin
    q <= d;
  end

endmodule
