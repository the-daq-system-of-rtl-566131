// tb_global_trigger_ff: checks the synchronizer of the asynchronous external trigger.
// Random-length pulses at random, clock-unrelated times: each rising edge while enabled must
// give exactly one one-clock trig_o pulse, 2 to 4 clocks after the edge; edges while
// trig_disable_i is high must give none.
`timescale 1ns/1ps
module tb_global_trigger_ff;
  logic clk = 0, rst = 1, ext = 0, dis = 0, trig;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0, pulses = 0;
  realtime t_edge;
  global_trigger_ff dut (.clk, .rst, .ext_trig_i(ext), .trig_disable_i(dis), .trig_o(trig));

  always @(posedge clk) if (!rst && trig) pulses++;
  always @(posedge clk) if (!rst && trig) begin
    checks++;
    if ($realtime - t_edge < 50 || $realtime - t_edge > 100) begin
      failures++; $display("FAIL latency %0t", $realtime - t_edge);
    end
  end

  initial begin
    #(1ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp;
    repeat (3) @(posedge clk); rst = 0; repeat (3) @(posedge clk);
    exp = 0;
    for (int i = 0; i < 60; i++) begin
      dis = (i % 3 == 2);
      #($urandom_range(50, 400) * 1.0ns + $urandom_range(0, 999) * 0.013ns);
      ext = 1; t_edge = $realtime;
      #($urandom_range(30, 300) * 1.0ns);
      ext = 0;
      #(200ns);
      if (!dis) exp++;
      checks++;
      if (pulses != exp) begin failures++; $display("FAIL pulse count %0d expected %0d", pulses, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
