// puf_pkg: constants and the delay model shared by the arbiter PUF modules.
//
// The only source of randomness in an arbiter PUF is the small
// chip-to-chip difference in the delay of each multiplexer and its
// routing. In silicon that difference comes from manufacturing. Here it
// comes from a fixed hash of (instance seed, stage, path), so that every
// instance, and every simulated "chip", gets its own repeatable set of delays.
// Each segment delay is NOMINAL_PS plus a spread of 0 .. SPREAD_PS-1 ps.
// The nominal value and the spread are this design's choice: the text
// says only that the two paths differ by "a small random offset".
`timescale 1ps / 1ps
package puf_pkg;

  // Challenge / response width of the proposed design (64-bit version).
  localparam int unsigned PUF_BITS   = 64;

  // Delay of one multiplexer output and its route, in ps.
  localparam int unsigned NOMINAL_PS = 400;
  localparam int unsigned SPREAD_PS  = 64;

  // Which of the two racing paths a delay belongs to.
  typedef enum logic {
    PATH_TOP = 1'b0,   // upper path, ends at the arbiter's D input
    PATH_BOT = 1'b1    // lower path, ends at the arbiter's clock input
  } path_e;

  // 32-bit integer mixing function (a "lowbias32" style finaliser).
  function automatic logic [31:0] hash32(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16);
    h = h * 32'h7feb_352d;
    h = h ^ (h >> 15);
    h = h * 32'h846c_a68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  // Delay in ps of the segment that leaves stage 'stage' on path 'path'
  // of the arbiter PUF whose identity is 'seed'.
  function automatic int unsigned segment_delay_ps(input int unsigned seed,
                                                   input int unsigned stage,
                                                   input path_e       path);
    logic [31:0] key;
    key = hash32(seed ^ 32'h9e37_79b9) ^ ((stage << 1) | 32'(path));
    return NOMINAL_PS + (int'(hash32(key)) & int'(SPREAD_PS - 1));
  endfunction

endpackage
