// tb_arbiter_puf: one 64-stage arbiter PUF against the reference race
// model. For each challenge the enable is pulsed and the response is
// compared with the arrival order the model computes from the segment
// delays. Whenever the response bit changes, the time of the change must
// be exactly the arrival time of the lower edge (the arbiter clock), which
// checks the latency through all N stages. Exact ties are skipped.
`timescale 1ps / 1ps
module tb_arbiter_puf;
  import puf_pkg::*;
  import puf_ref_pkg::*;

  localparam int unsigned N    = PUF_BITS;
  localparam int unsigned SEED = 7;
  localparam int unsigned SETTLE_PS = N * (NOMINAL_PS + SPREAD_PS) + 1000;
  localparam int unsigned NUM_CHALLENGES = 300;

  logic         en;
  logic [N-1:0] c;
  logic         puf_out;
  int checks = 0, failures = 0;
  int ones = 0, zeros = 0, ties = 0, changes = 0;
  time t_rise, t_change;

  arbiter_puf #(.N(N), .SEED(SEED)) dut (.en(en), .c(c), .puf_out(puf_out));

  // Time of the last change of the response bit.
  always begin
    @(puf_out);
    t_change = $time;
  end

  initial begin : watchdog
    #(64'(NUM_CHALLENGES + 10) * 3 * SETTLE_PS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input logic [N-1:0] ch);
    race_t r;
    logic prev_bit;
    en = 0;
    c  = ch;
    #(SETTLE_PS);
    prev_bit = puf_out;
    t_change = 0;
    en = 1;
    t_rise = $time;
    #(SETTLE_PS);
    r = race(SEED, N, 64'(ch));
    if (r.t_top == r.t_bot) begin
      ties++;
    end else begin
      checks++;
      if (puf_out !== expected_bit(r)) begin
        failures++;
        $display("FAIL challenge %h: response %b expected %b (top %0d bot %0d)",
                 ch, puf_out, expected_bit(r), r.t_top, r.t_bot);
      end
      if (puf_out) ones++; else zeros++;
      if (puf_out !== prev_bit) begin
        changes++;
        checks++;
        if (t_change - t_rise != time'(r.t_bot)) begin
          failures++;
          $display("FAIL challenge %h: response changed %0t ps after enable, expected %0d",
                   ch, t_change - t_rise, r.t_bot);
        end
      end
    end
    en = 0;
  endtask

  initial begin
    logic [N-1:0] ch;
    logic         ref_bit;
    en = 0;
    c  = '0;
    measure('0);
    measure('1);
    for (int i = 0; i < NUM_CHALLENGES; i++) begin
      ch = N'(rand64());
      measure(ch);
    end
    // Repeating a challenge must give the same bit.
    for (int i = 0; i < 20; i++) begin
      ch = N'(rand64());
      measure(ch);
      ref_bit = puf_out;
      measure(~ch);
      measure(ch);
      checks++;
      if (puf_out !== ref_bit) begin
        failures++;
        $display("FAIL challenge %h not reproducible", ch);
      end
    end
    checks++;
    if (ones == 0 || zeros == 0 || changes == 0) begin
      failures++;
      $display("FAIL response never varied: ones=%0d zeros=%0d changes=%0d", ones, zeros, changes);
    end
    $display("responses: ones=%0d zeros=%0d ties=%0d changes=%0d", ones, zeros, ties, changes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
