// tb_data_fifo: random writes and reads against a queue reference model, respecting full and
// empty, with occasional flushes; checks data order, count, full and empty every clock, and
// fills the FIFO to full once.
`timescale 1ns/1ps
module tb_data_fifo;
  localparam int W = 16, DEPTH = 64;
  logic clk = 0, rst = 1, flush = 0, wr = 0, rd = 0, full, empty;
  logic [W-1:0] wd = '0, rdata;
  logic [$clog2(DEPTH):0] count;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0, fulls = 0;
  data_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst, .flush, .wr_en(wr), .wr_data(wd), .rd_en(rd),
    .rd_data(rdata), .full, .empty, .count);
  initial begin
    #(2ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [W-1:0] q [$];
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk); #1;
    for (int i = 0; i < 6000; i++) begin
      automatic int phase = (i / 500) % 3;  // 0 filling, 1 mixed, 2 draining
      logic dw, dr;
      dw = !full && ($urandom_range(0, 9) < (phase == 0 ? 9 : phase == 1 ? 5 : 1));
      dr = !empty && ($urandom_range(0, 9) < (phase == 0 ? 1 : phase == 1 ? 5 : 9));
      checks++;
      if (!empty && rdata !== q[0]) begin failures++; $display("FAIL data %h vs %h", rdata, q[0]); end
      checks++;
      if (count != q.size() || empty != (q.size() == 0) || full != (q.size() == DEPTH)) begin
        failures++; $display("FAIL status count=%0d q=%0d", count, q.size());
      end
      if (full) fulls++;
      flush <= ($urandom_range(0, 999) == 0);
      wr <= dw; rd <= dr; wd <= W'($urandom);
      @(posedge clk); #1;
      if (flush) q.delete();
      else begin
        if (dr) void'(q.pop_front());
        if (dw) q.push_back(wd);
      end
    end
    checks++; if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
