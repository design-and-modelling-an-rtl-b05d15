// tb_arbiter: the arbiter flip-flop must capture the upper path on a
// rising edge of the lower path and hold it otherwise.
// Cases: upper edge first (1), lower edge first (0), upper path changing
// while the clock is high or falling (held), several repetitions.
`timescale 1ps / 1ps
module tb_arbiter;
  logic d, clk, q;
  int checks = 0, failures = 0;

  arbiter dut (.*);

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic exp);
    checks++;
    if (q !== exp) begin
      failures++;
      $display("FAIL %s at %0t: q=%b expected %b", what, $time, q, exp);
    end
  endtask

  // One race: the upper edge arrives at t_top, the lower one at t_bot.
  task automatic race(input int t_top, input int t_bot);
    logic exp;
    d = 0; clk = 0;
    #1000;
    exp = logic'(t_top < t_bot);
    fork
      begin #(t_top); d = 1; end
      begin #(t_bot); clk = 1; end
    join
    #100;
    check("after race", exp);
    d = 0;                 // falling upper path while clock is high
    #100;
    check("hold clk high", exp);
    clk = 0;               // falling lower path: no capture
    #100;
    check("hold falling edge", exp);
  endtask

  initial begin
    race(100, 200);
    race(300, 120);
    race(10, 11);
    race(11, 10);
    for (int i = 0; i < 50; i++) begin
      int a, b;
      a = 1 + int'($urandom_range(500));
      b = 1 + int'($urandom_range(500));
      if (a != b) race(a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
