// mux_puf_top: the proposed N-bit-response multiplexer (arbiter) PUF.
//
// A conventional arbiter PUF gives one bit per N-bit challenge. Here N
// arbiter PUFs of N stages each receive the same enable and the same
// challenge, and instance k gives bit k of an N-bit response, so one
// challenge yields as many response bits as it has challenge bits. The
// instances are identical in logic and differ only in their path delays
// (their placement on a real device; here the seed CHIP_SEED*65536 + k).
//
// Interface: en (EN), clg (CLG, challenge) and puf_out[N:1] (PUF_OUT).
// Timing: as for one arbiter_puf. Set clg with en low and wait for the
// paths to fall, raise en, and all N response bits are valid once the
// slowest path has arrived, about N * (NOMINAL_PS + SPREAD_PS) ps later.
//
// N copies on a common challenge and enable, the port names and the
// 64-bit default follow the published design; the bit order
// (instance k drives puf_out[k]) is this design's choice. The FPGA pad
// buffers of the published schematic are left to the implementation tool.
`timescale 1ps / 1ps
module mux_puf_top #(
  parameter int unsigned N         = puf_pkg::PUF_BITS,  // challenge and response width
  parameter int unsigned CHIP_SEED = 1                   // identity of the modelled chip
) (
  input  logic         en,        // enable
  input  logic [N-1:0] clg,       // challenge, common to all instances
  output logic [N:1]   puf_out    // response, bit k from instance k
);

  for (genvar k = 1; k <= N; k++) begin : g_puf
    arbiter_puf #(
      .N   (N),
      .SEED(CHIP_SEED * 65536 + k)
    ) u_puf (
      .en     (en),
      .c      (clg),
      .puf_out(puf_out[k])
    );
  end

endmodule
