// tb_hexaboard_bridge: checks that trigger, readout request and reset reach the module one
// clock later as single pulses, that the pending-trigger flag follows trigger and request, and
// that the byte counter restarts at each trigger and counts received bytes.
`timescale 1ns/1ps
module tb_hexaboard_bridge;
  logic clk = 0, rst = 1, trig = 0, crd = 0, crst = 0, busy = 0, rxv = 0;
  logic ht, hr, hs, pend, sending;
  logic [15:0] nb;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  hexaboard_bridge dut (.clk, .rst, .trig_i(trig), .cmd_readout_i(crd), .cmd_reset_i(crst),
    .hb_trig_o(ht), .hb_readout_o(hr), .hb_reset_o(hs), .hb_busy_i(busy), .rx_valid_i(rxv),
    .triggered_o(pend), .sending_o(sending), .bytes_o(nb));
  task automatic chk(input string w, input logic [31:0] got, input logic [31:0] exp);
    checks++; if (got !== exp) begin failures++; $display("FAIL %s: %0d vs %0d", w, got, exp); end
  endtask
  initial begin
    #(2ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk); #1;
    for (int ev = 0; ev < 5; ev++) begin
      int n;
      trig <= 1; @(posedge clk); #1; trig <= 0;
      chk("hb_trig", ht, 1); chk("pending", pend, 1); chk("bytes cleared", nb, 0);
      @(posedge clk); #1; chk("hb_trig one clock", ht, 0);
      crd <= 1; @(posedge clk); #1; crd <= 0;
      chk("hb_readout", hr, 1); chk("pending cleared", pend, 0);
      @(posedge clk); #1; chk("hb_readout one clock", hr, 0);
      n = $urandom_range(10, 300);
      busy <= 1;
      for (int k = 0; k < n; k++) begin rxv <= ($urandom_range(0, 3) != 0); @(posedge clk); #1; if (rxv) ; end
      rxv <= 0; busy <= 0;
      @(posedge clk); #1;
      crst <= 1; @(posedge clk); #1; crst <= 0; chk("hb_reset", hs, 1);
      @(posedge clk); #1; chk("hb_reset one clock", hs, 0);
    end
    // byte count against a reference
    trig <= 1; @(posedge clk); #1; trig <= 0;
    begin
      int cnt = 0;
      for (int k = 0; k < 500; k++) begin
        rxv <= $urandom_range(0, 1); @(posedge clk); #1; if (rxv) cnt++;
      end
      rxv <= 0; @(posedge clk); #1;
      chk("byte count", nb, cnt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
