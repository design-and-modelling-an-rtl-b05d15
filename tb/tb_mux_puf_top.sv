// tb_mux_puf_top: end-to-end test of the N-bit-response PUF.
//
// Two modelled chips (different CHIP_SEED) of the reduced size N = 8,
// the size of the published 8-bit macro, get the same challenges. Every
// response bit of every chip is compared with the reference race model
// of its instance. The test also counts, and requires at least once:
// straight and crossed stages in the applied challenges, response bits of
// 0 and of 1, a response bit that changes on the enable edge (latency
// checked against the model), a repeated challenge giving the same
// response, two instances of one chip disagreeing on a challenge, and
// the two chips disagreeing on a challenge.
`timescale 1ps / 1ps
module tb_mux_puf_top;
  import puf_pkg::*;
  import puf_ref_pkg::*;

  localparam int unsigned N = 8;
  localparam int unsigned SEED_A = 1;
  localparam int unsigned SEED_B = 2;
  localparam int unsigned SETTLE_PS = N * (NOMINAL_PS + SPREAD_PS) + 1000;
  localparam int unsigned NUM_CHALLENGES = 200;

  logic         en;
  logic [N-1:0] clg;
  logic [N:1]   out_a, out_b;
  int checks = 0, failures = 0;
  int n_straight = 0, n_crossed = 0, n_one = 0, n_zero = 0, n_tie = 0;
  int n_change = 0, n_repeat = 0, n_intra_diff = 0, n_inter_diff = 0;
  time t_rise;
  time t_change[N:1];

  mux_puf_top #(.N(N), .CHIP_SEED(SEED_A)) dut_a (.en(en), .clg(clg), .puf_out(out_a));
  mux_puf_top #(.N(N), .CHIP_SEED(SEED_B)) dut_b (.en(en), .clg(clg), .puf_out(out_b));

  for (genvar k = 1; k <= N; k++) begin : g_mon
    always begin
      @(out_a[k]);
      t_change[k] = $time;
    end
  end

  initial begin : watchdog
    #(64'(NUM_CHALLENGES + 20) * 3 * SETTLE_PS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_chip(input logic [N:1] got, input logic [N:1] prev,
                            input int unsigned chip_seed, input logic [N-1:0] ch,
                            input bit is_a);
    for (int k = 1; k <= N; k++) begin
      race_t r;
      r = race(chip_seed * 65536 + k, N, 64'(ch));
      if (r.t_top == r.t_bot) begin
        n_tie++;
        continue;
      end
      checks++;
      if (got[k] !== expected_bit(r)) begin
        failures++;
        $display("FAIL chip %0d bit %0d challenge %h: got %b expected %b",
                 chip_seed, k, ch, got[k], expected_bit(r));
      end
      if (got[k]) n_one++; else n_zero++;
      if (is_a && got[k] !== prev[k]) begin
        n_change++;
        checks++;
        if (t_change[k] - t_rise != time'(r.t_bot)) begin
          failures++;
          $display("FAIL bit %0d changed %0t ps after enable, expected %0d",
                   k, t_change[k] - t_rise, r.t_bot);
        end
      end
    end
  endtask

  task automatic measure(input logic [N-1:0] ch, output logic [N:1] ra, output logic [N:1] rb);
    logic [N:1] prev_a, prev_b;
    en  = 0;
    clg = ch;
    #(SETTLE_PS);
    prev_a = out_a;
    prev_b = out_b;
    en = 1;
    t_rise = $time;
    #(SETTLE_PS);
    ra = out_a;
    rb = out_b;
    // Stage 0 has both inputs tied to en, so its challenge bit never matters.
    for (int i = 1; i < N; i++) if (ch[i]) n_crossed++; else n_straight++;
    check_chip(ra, prev_a, SEED_A, ch, 1'b1);
    check_chip(rb, prev_b, SEED_B, ch, 1'b0);
    if (ra != rb) n_inter_diff++;
    if (ra != '0 && ra != '1) n_intra_diff++;
    en = 0;
  endtask

  task automatic require(input string what, input int count);
    checks++;
    $display("  %-32s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never seen: %s", what);
    end
  endtask

  initial begin
    logic [N-1:0] ch;
    logic [N:1] ra, rb, ra2, rb2;
    en  = 0;
    clg = '0;
    measure('0, ra, rb);
    measure('1, ra, rb);
    for (int i = 0; i < NUM_CHALLENGES; i++) begin
      ch = N'($urandom());
      measure(ch, ra, rb);
      if (i % 10 == 0) begin
        measure(~ch, ra2, rb2);
        measure(ch, ra2, rb2);
        checks++;
        if (ra2 !== ra || rb2 !== rb) begin
          failures++;
          $display("FAIL challenge %h not reproducible", ch);
        end else begin
          n_repeat++;
        end
      end
    end
    $display("mechanisms:");
    require("straight stage (c=0)", n_straight);
    require("crossed stage (c=1)", n_crossed);
    require("response bit 0", n_zero);
    require("response bit 1", n_one);
    require("response bit changed on enable", n_change);
    require("repeated challenge reproduced", n_repeat);
    require("instances of one chip differ", n_intra_diff);
    require("two chips differ", n_inter_diff);
    $display("  exact ties skipped               %0d", n_tie);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
