// arbiter_puf: conventional N-stage arbiter PUF (one response bit).
//
// The enable input is fed to both inputs of the first switch block, so
// its rising edge launches two racing edges. Stage i passes them straight
// on (c[i] = 0) or swaps them (c[i] = 1); every multiplexer output is
// followed by its own segment delay, held for each path by one path_delay. After stage
// N-1 the upper path drives the arbiter's D input and the lower path its
// clock, so puf_out = 1 when the total upper-path delay is the smaller.
//
// Use: hold c stable with en low until both paths are low (about
// N * (NOMINAL_PS + SPREAD_PS) ps), raise en, and read puf_out once the
// slower edge has reached the arbiter (again about N * 464 ps). Lower en
// before the next challenge. puf_out keeps the last decision until then.
//
// The structure (N switch blocks, inputs of the first tied to enable, a
// D flip-flop arbiter) and the port names EN, c and PUF_OUT follow the
// published design. SEED, which picks this instance's delays, replaces
// the placement on a real device and is this design's addition.
`timescale 1ps / 1ps
module arbiter_puf #(
  parameter int unsigned N    = puf_pkg::PUF_BITS,  // number of stages
  parameter int unsigned SEED = 1                   // instance identity
) (
  input  logic         en,       // enable step launched into both paths
  input  logic [N-1:0] c,        // challenge, c[0] selects the first stage
  output logic         puf_out   // response bit
);
  import puf_pkg::*;

  // top[i] / bot[i]: the two racing signals entering stage i.
  logic [N:0]   top;
  logic [N:0]   bot;
  // Multiplexer outputs of each stage, before their segment delays.
  logic [N-1:0] mux_top;
  logic [N-1:0] mux_bot;

  assign top[0] = en;
  assign bot[0] = en;

  for (genvar i = 0; i < N; i++) begin : g_stage
    mux_switch_block u_switch (
      .c      (c[i]),
      .in_top (top[i]),
      .in_bot (bot[i]),
      .out_top(mux_top[i]),
      .out_bot(mux_bot[i])
    );
  end

  path_delay #(.N(N), .SEED(SEED), .PATH(PATH_TOP)) u_delay_top (
    .in (mux_top),
    .out(top[N:1])
  );

  path_delay #(.N(N), .SEED(SEED), .PATH(PATH_BOT)) u_delay_bot (
    .in (mux_bot),
    .out(bot[N:1])
  );

  arbiter u_arbiter (
    .d  (top[N]),
    .clk(bot[N]),
    .q  (puf_out)
  );

endmodule
