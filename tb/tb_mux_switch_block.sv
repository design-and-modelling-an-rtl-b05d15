// tb_mux_switch_block: exhaustive check of one arbiter PUF stage.
// All eight combinations of select and inputs are applied; c = 0 must pass
// both signals straight on and c = 1 must swap them.
`timescale 1ps / 1ps
module tb_mux_switch_block;
  logic c, in_top, in_bot, out_top, out_bot;
  int checks = 0, failures = 0;

  mux_switch_block dut (.*);

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {c, in_top, in_bot} = 3'(v);
      #10;
      checks += 2;
      if (out_top !== (c ? in_bot : in_top)) begin
        failures++;
        $display("FAIL c=%b top=%b bot=%b: out_top=%b", c, in_top, in_bot, out_top);
      end
      if (out_bot !== (c ? in_top : in_bot)) begin
        failures++;
        $display("FAIL c=%b top=%b bot=%b: out_bot=%b", c, in_top, in_bot, out_bot);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
