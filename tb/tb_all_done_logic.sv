// tb_all_done_logic: for random board masks, boards report ReadoutDone in random order and
// durations; Done must stay low until the last enabled board has reported, rise one clock after
// it, hold until the next trigger, and ignore reports from masked boards.
`timescale 1ns/1ps
module tb_all_done_logic;
  localparam int N = 15;
  logic clk = 0, rst = 1, trig = 0, done;
  logic [N-1:0] rd = '0, mask;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  all_done_logic #(.N_BOARDS(N)) dut (.clk, .rst, .trig_i(trig), .readout_done_i(rd),
    .board_mask_i(mask), .done_o(done));
  initial begin
    #(2ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    mask = '1;
    repeat (3) @(posedge clk); rst <= 0; @(posedge clk);
    for (int ev = 0; ev < 30; ev++) begin
      int order [$];
      logic [N-1:0] seen;
      mask <= (ev == 0) ? '1 : N'($urandom) | N'(1);
      trig <= 1; @(posedge clk); trig <= 0; @(posedge clk); #1;
      checks++; if (done) begin failures++; $display("FAIL done right after trigger"); end
      for (int b = 0; b < N; b++) order.push_back(b);
      order.shuffle();
      seen = '0;
      foreach (order[k]) begin
        rd[order[k]] <= 1'b1;
        @(posedge clk); rd[order[k]] <= (ev % 2 == 0) ? 1'b1 : 1'b0;  // level or pulse
        seen[order[k]] = 1'b1;
        @(posedge clk); #1;
        checks++;
        if (done !== ((seen & mask) == mask)) begin
          failures++; $display("FAIL ev %0d: done=%b seen=%h mask=%h", ev, done, seen, mask);
        end
      end
      rd <= '0;
      repeat (3) @(posedge clk); #1;
      checks++; if (!done) begin failures++; $display("FAIL done not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
