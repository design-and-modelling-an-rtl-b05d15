// tb_path_delay: checks the delay model of one racing path.
// Each segment is toggled on its own, and also all together, and its
// output must change exactly segment_delay_ps(SEED, i, PATH) later, not a
// picosecond earlier, for rising and falling edges. A pulse shorter than
// the delay must also come through (transport delay).
`timescale 1ps / 1ps
module tb_path_delay;
  import puf_pkg::*;

  localparam int unsigned N    = 8;
  localparam int unsigned SEED = 3;

  logic [N-1:0] in, out;
  int checks = 0, failures = 0;

  path_delay #(.N(N), .SEED(SEED), .PATH(PATH_BOT)) dut (.in(in), .out(out));

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int i, input logic exp);
    checks++;
    if (out[i] !== exp) begin
      failures++;
      $display("FAIL %s segment %0d at %0t: got %b expected %b", what, i, $time, out[i], exp);
    end
  endtask

  // Toggle segment i and watch its output around the expected delay.
  task automatic edge_on(input int i);
    int unsigned d;
    logic v;
    d = segment_delay_ps(SEED, i, PATH_BOT);
    v = ~in[i];
    in[i] = v;
    #(d - 1);
    check("before delay", i, ~v);
    #1;
    check("at delay", i, v);
    #1000;
  endtask

  initial begin
    in = '0;
    #2000;
    for (int i = 0; i < N; i++) check("settled", i, 0);
    for (int rep = 0; rep < 2; rep++)
      for (int i = 0; i < N; i++) edge_on(i);      // rise, then fall
    // All segments at once.
    in = '1;
    for (int i = 0; i < N; i++) begin
      fork
        automatic int k = i;
        begin
          #(segment_delay_ps(SEED, k, PATH_BOT) - 1);
          check("all, before", k, 0);
          #1;
          check("all, at", k, 1);
        end
      join_none
    end
    #2000;
    // A 50 ps pulse, shorter than any delay, must still appear at the output.
    in[0] = 0;
    #50;
    in[0] = 1;
    #(segment_delay_ps(SEED, 0, PATH_BOT) - 25);
    check("short pulse low", 0, 0);
    #50;
    check("short pulse high", 0, 1);
    // The delays of the two paths and of two seeds must not all be equal.
    checks++;
    begin
      int same = 0;
      for (int i = 0; i < N; i++)
        if (segment_delay_ps(SEED, i, PATH_BOT) == segment_delay_ps(SEED, i, PATH_TOP)) same++;
      if (same == N) begin
        failures++;
        $display("FAIL upper and lower delays identical");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
