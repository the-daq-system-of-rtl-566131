// tb_trigger_disable_logic: walks the gate through trigger -> busy -> done -> waiting, checks that
// Done without a trigger changes nothing, and that the SPI Disable closes the gate in either state.
`timescale 1ns/1ps
module tb_trigger_disable_logic;
  logic clk = 0, rst = 1, trig = 0, done = 0, dis = 0, tdis, wait_o;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  trigger_disable_logic dut (.clk, .rst, .trig_i(trig), .done_i(done), .disable_i(dis),
    .trig_disable_o(tdis), .waiting_o(wait_o));
  task automatic expect2(input string what, input logic e_tdis, input logic e_wait);
    checks++;
    if (tdis !== e_tdis || wait_o !== e_wait) begin
      failures++; $display("FAIL %s: disable=%b waiting=%b", what, tdis, wait_o);
    end
  endtask
  initial begin
    #(1ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk); #1;
    expect2("after reset", 0, 1);
    for (int ev = 0; ev < 5; ev++) begin
      done <= 1; @(posedge clk); #1; expect2("done while waiting", 0, 1); done <= 0;
      trig <= 1; @(posedge clk); #1; trig <= 0; expect2("after trigger", 1, 0);
      repeat ($urandom_range(1, 30)) begin @(posedge clk); #1; end
      expect2("busy", 1, 0);
      done <= 1; @(posedge clk); #1; done <= 0; expect2("after done", 0, 1);
    end
    dis <= 1; @(posedge clk); #1; expect2("disabled waiting", 1, 0);
    trig <= 1; @(posedge clk); #1; trig <= 0; dis <= 0; @(posedge clk); #1;
    expect2("trigger while disabled still starts a cycle", 1, 0);
    done <= 1; @(posedge clk); #1; done <= 0; expect2("done", 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
