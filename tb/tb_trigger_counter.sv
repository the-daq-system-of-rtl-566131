// tb_trigger_counter: random trigger pulses and clears against a reference count, including
// a clear and a trigger in the same clock.
`timescale 1ns/1ps
module tb_trigger_counter;
  logic clk = 0, rst = 1, clr = 0, trig = 0;
  logic [31:0] cnt;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  trigger_counter #(.W(32)) dut (.clk, .rst, .clr_i(clr), .trig_i(trig), .count_o(cnt));
  initial begin
    #(1ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int unsigned ref_cnt = 0;
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk);
    for (int i = 0; i < 2000; i++) begin
      trig <= ($urandom_range(0, 2) == 0);
      clr  <= ($urandom_range(0, 150) == 0);
      @(posedge clk); #1;
      if (clr) ref_cnt = trig ? 1 : 0;
      else if (trig) ref_cnt++;
      checks++;
      if (cnt !== ref_cnt) begin failures++; $display("FAIL %0d: %0d vs %0d", i, cnt, ref_cnt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
