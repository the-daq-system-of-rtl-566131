// tb_trigger_ff: a Trigger level held for 1..20 clocks must give exactly one trig_o pulse of one
// clock, two clocks after the line rises.
`timescale 1ns/1ps
module tb_trigger_ff;
  logic clk = 0, rst = 1, tin = 0, tout;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0, pulses = 0, cyc = 0, rise_cyc = 0;
  trigger_ff dut (.clk, .rst, .trig_i(tin), .trig_o(tout));
  always @(posedge clk) begin
    cyc++;
    if (!rst && tout) begin
      pulses++; checks++;
      if (cyc - rise_cyc != 2) begin failures++; $display("FAIL latency %0d", cyc - rise_cyc); end
    end
  end
  initial begin
    #(1ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst <= 0; repeat (3) @(posedge clk);
    for (int i = 1; i <= 40; i++) begin
      tin <= 1; rise_cyc = cyc + 1;
      repeat ($urandom_range(1, 20)) @(posedge clk);
      tin <= 0;
      repeat ($urandom_range(3, 10)) @(posedge clk);
      checks++;
      if (pulses != i) begin failures++; $display("FAIL count %0d expected %0d", pulses, i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
