// tb_mux_puf_full: the 64-bit design at its default size, used the way
// the published measurements were: challenge-response pairs are collected
// one enable pulse at a time.
//
// The ten 64-bit challenges of the published CRP table are applied first,
// then random challenges, NUM_CRPS pairs in all (750, the smallest
// published CRP set). Every one of the 64 response bits is compared with
// the reference race model of its instance; the responses to the table's
// challenges are printed (they belong to this modelled chip, not to the
// measured FPGA, so they differ from the published ones). It also checks
// that the response is complete within 64 * (NOMINAL_PS + SPREAD_PS) of
// the enable edge, that a repeated challenge reproduces its response, and
// reports the fraction of 1 bits and the average number of response bits
// in which two challenges differ, both expected near 50 %.
`timescale 1ps / 1ps
module tb_mux_puf_full;
  import puf_pkg::*;
  import puf_ref_pkg::*;

  localparam int unsigned N         = PUF_BITS;
  localparam int unsigned LATENCY   = N * (NOMINAL_PS + SPREAD_PS);
  localparam int unsigned SETTLE_PS = LATENCY + 1000;
  localparam int unsigned NUM_CRPS  = 750;

  // Challenges of the published CRP table (the first has 15 hex digits as printed).
  localparam logic [63:0] TABLE_CHALLENGE [10] = '{
    64'h9283c630815977c,  64'h824e3d711516856b, 64'h92304516c4bb0240,
    64'h200fbac6d9bb7303, 64'h6844dcc6a582ac22, 64'h686d3ec2141a7dfb,
    64'h6494978f8293cf35, 64'hef911feddf105f4e, 64'h7b2869d1d09564d2,
    64'hf0d856b216b4c3a3
  };

  logic         en;
  logic [N-1:0] clg;
  logic [N:1]   puf_out;
  int checks = 0, failures = 0;
  longint ones = 0, bits = 0, hd_sum = 0;
  int n_tie = 0, n_pairs = 0;
  logic [N:1] last_resp;

  mux_puf_top dut (.en(en), .clg(clg), .puf_out(puf_out));

  initial begin : watchdog
    #(64'(NUM_CRPS + 20) * 2 * SETTLE_PS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic crp(input logic [N-1:0] ch, output logic [N:1] resp);
    en  = 0;
    clg = ch;
    #(SETTLE_PS);
    en = 1;
    #(LATENCY);                 // the slowest possible path has arrived
    resp = puf_out;
    for (int k = 1; k <= N; k++) begin
      race_t r;
      r = race(32'd65536 + k, N, 64'(ch));
      if (r.t_top == r.t_bot) begin
        n_tie++;
        continue;
      end
      checks++;
      if (resp[k] !== expected_bit(r)) begin
        failures++;
        $display("FAIL challenge %h bit %0d: got %b expected %b", ch, k, resp[k], expected_bit(r));
      end
      bits++;
      if (resp[k]) ones++;
    end
    #(SETTLE_PS - LATENCY);
    en = 0;
  endtask

  initial begin
    logic [N:1] resp, resp2;
    logic [N-1:0] ch;
    en  = 0;
    clg = '0;
    for (int i = 0; i < NUM_CRPS; i++) begin
      ch = (i < 10) ? N'(TABLE_CHALLENGE[i]) : N'(rand64());
      crp(ch, resp);
      if (i < 10) $display("challenge %h -> response %h", ch, resp);
      if (i > 0) begin
        hd_sum += $countones(resp ^ last_resp);
        n_pairs++;
      end
      last_resp = resp;
    end
    // Reproducibility of the first table challenge.
    crp(N'(TABLE_CHALLENGE[0]), resp);
    crp(~N'(TABLE_CHALLENGE[0]), resp2);
    crp(N'(TABLE_CHALLENGE[0]), resp2);
    checks++;
    if (resp2 !== resp) begin
      failures++;
      $display("FAIL repeated challenge gave %h then %h", resp, resp2);
    end
    $display("CRPs %0d, ones %0d of %0d bits (%0d %%), mean distance between successive responses %0d of %0d bits, ties %0d",
             NUM_CRPS, ones, bits, 100 * ones / bits, hd_sum / n_pairs, N, n_tie);
    checks++;
    if (100 * ones / bits < 35 || 100 * ones / bits > 65) begin
      failures++;
      $display("FAIL response bits strongly biased");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
