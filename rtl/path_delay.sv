// path_delay: behavioural model of the propagation delays along one of the
// two racing paths of an arbiter PUF.
//
// An arbiter PUF works only because every multiplexer output and its route
// has a slightly different delay, fixed by manufacturing variation. This
// model holds the N segment delays of one path (upper or lower) of one PUF
// instance: out[i] repeats in[i], the output of the multiplexer of stage i,
// segment_delay_ps(SEED, i, PATH) picoseconds later. It is a transport
// delay, so every edge is passed on however short the pulse, and all
// outputs start low (the enable is low at power-up).
//
// This is a behavioural model, not synthesizable logic: in an
// implementation each segment is simply the wire from one switch block to
// the next, and synthesis drops the delay. The delays of a whole path sit
// in one process, not one per segment, so that simulators stay fast on the
// 64 x 64-stage design. The delay values are this design's choice (see
// puf_pkg); the text says only that manufacturing gives each path its own
// small random offset. Although out[i] feeds in[i+1] through the next
// switch block, there is no combinational loop: every path through this
// module is broken by a delay of at least NOMINAL_PS. For the same reason
// the lint remark that this delay "can be #0" does not apply: its value,
// computed at run time, is never below NOMINAL_PS.
`timescale 1ps / 1ps
module path_delay #(
  parameter int unsigned   N    = puf_pkg::PUF_BITS,  // segments on the path
  parameter int unsigned   SEED = 1,                  // PUF instance identity
  parameter puf_pkg::path_e PATH = puf_pkg::PATH_TOP  // which of the two paths
) (
  input  logic [N-1:0] in,   // multiplexer outputs of stages 0 .. N-1
  output logic [N-1:0] out   // the same signals after their segment delays
);
  import puf_pkg::*;

  logic [N-1:0] seen;        // value of 'in' already scheduled per segment

  initial begin
    out  = '0;
    seen = '0;
  end

  always @(in) begin
    for (int unsigned i = 0; i < N; i++) begin
      if (in[i] != seen[i]) begin
        seen[i] = in[i];
        // One short-lived process per edge carries it to the output.
        fork
          automatic int unsigned k = i;
          automatic logic        v = in[i];
          begin
            #(segment_delay_ps(SEED, k, PATH));
            out[k] = v;
          end
        join_none
      end
    end
  end

endmodule
