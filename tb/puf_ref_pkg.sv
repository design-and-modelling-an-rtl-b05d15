// puf_ref_pkg: reference model used by the testbenches.
//
// Computes, with plain integer arithmetic and no reference to the RTL
// netlist, when the two racing edges of an arbiter PUF reach the arbiter:
// stage i adds its upper-path delay to whichever arrival time it routes to
// the upper output and its lower-path delay to the other, swapping the two
// when the challenge bit is 1. The response is 1 when the upper edge is
// first. The per-segment delays are taken from puf_pkg, the same table the
// delay elements are built with.
`timescale 1ps / 1ps
package puf_ref_pkg;
  import puf_pkg::*;

  typedef struct {
    longint t_top;   // arrival of the upper edge after en rises, ps
    longint t_bot;   // arrival of the lower edge (arbiter clock), ps
  } race_t;

  function automatic race_t race(input int unsigned seed, input int unsigned n,
                                 input logic [63:0] ch);
    race_t r;
    longint a, b;
    a = 0;
    b = 0;
    for (int unsigned i = 0; i < n; i++) begin
      if (ch[i]) begin
        longint t;
        t = a; a = b; b = t;
      end
      a += longint'(segment_delay_ps(seed, i, PATH_TOP));
      b += longint'(segment_delay_ps(seed, i, PATH_BOT));
    end
    r.t_top = a;
    r.t_bot = b;
    return r;
  endfunction

  function automatic logic expected_bit(input race_t r);
    return logic'(r.t_top < r.t_bot);
  endfunction

  function automatic logic [63:0] rand64();
    return {$urandom(), $urandom()};
  endfunction

endpackage
