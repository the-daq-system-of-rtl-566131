// tb_ctl_orm: the CTL oRM with four stream sources. Checks that words sent while
// WaitingForTrigger is high are flushed (FIFO_Reset), that after a trigger the four streams are
// merged into the expected 32-bit words, that the trigger counter and configuration clear work
// over IPbus/SPI, and that ReadoutDone follows the full read plus the Pi's start of acquisition.
`timescale 1ns/1ps
module tb_ctl_orm;
  import hgc_pkg::*;
  localparam int EW = 64, DEPTH = 128;
  logic clk = 0, rst = 1, trig = 0, waiting = 1, done;
  always #12.5 clk = ~clk;
  logic [0:0] sclk, mosi, miso; logic [0:0][0:0] cs_n;
  logic [3:0] v = '0, rdy; logic [3:0][15:0] d;
  ipb_wbus_t [0:0] w; ipb_rbus_t [0:0] r;
  int checks = 0, failures = 0;

  ctl_orm #(.DEPTH(DEPTH), .EVENT_WORDS(EW)) dut (.clk, .rst, .trig_i(trig), .waiting_i(waiting),
    .readout_done_o(done), .spi_sclk(sclk[0]), .spi_cs_n(cs_n[0][0]), .spi_mosi(mosi[0]),
    .spi_miso(miso[0]), .rx_valid_i(v), .rx_data_i(d), .rx_ready_o(rdy), .ipb_w(w[0]), .ipb_r(r[0]));
  pi_spi_model #(.NBUS(1), .NCS(1)) pi (.sclk, .cs_n, .mosi, .miso);
  ipb_master_model #(.NBUS(1)) ipb (.clk, .w, .r);

  task automatic chk(input string wh, input logic [31:0] got, input logic [31:0] exp);
    checks++; if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", wh, got, exp); end
  endtask

  // stream sources: send words[s][0..n-1] with random gaps
  logic [15:0] src [4][$];
  always @(posedge clk) for (int s = 0; s < 4; s++) begin
    if (v[s] && rdy[s]) void'(src[s].pop_front());
  end
  always @(negedge clk) for (int s = 0; s < 4; s++) begin
    v[s] = (src[s].size() > 0) && ($urandom_range(0, 2) != 0);
    d[s] = (src[s].size() > 0) ? src[s][0] : 16'h0;
  end

  initial begin
    #(10ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] x; logic e;
    repeat (3) @(posedge clk); rst <= 0; repeat (3) @(posedge clk);
    pi.write(0, 0, 0, 32'hFF);          // all eight modules
    pi.write(0, 0, 1, 32'h2);           // configuration
    for (int ev = 1; ev <= 3; ev++) begin
      logic [31:0] exp_w [$];
      exp_w.delete();
      // junk while waiting: must be flushed
      for (int s = 0; s < 4; s++) repeat (10) src[s].push_back(16'hDEAD);
      repeat (40) @(posedge clk);
      ipb.read(0, IPB_STATUS, x, e); chk("no data while waiting", x[0], 0);
      waiting <= 0; trig <= 1; @(posedge clk); trig <= 0;
      for (int n = 0; n < EW; n++) begin
        logic [31:0] wd = 0;
        for (int s = 0; s < 4; s++) begin
          logic [15:0] h = {4'h8, 4'($urandom), 4'h8, 4'($urandom)};
          src[s].push_back(h);
          wd[31-8*s -: 4] = h[11:8]; wd[27-8*s -: 4] = h[3:0];
        end
        exp_w.push_back(wd);
      end
      do ipb.read(0, IPB_STATUS, x, e); while (!x[0]);
      ipb.read(0, IPB_TRIGCNT, x, e); chk("trigger count", x, ev);
      foreach (exp_w[n]) begin
        ipb.read(0, IPB_FIFO, x, e); chk($sformatf("ev %0d word %0d", ev, n), x, exp_w[n]);
      end
      repeat (5) @(posedge clk); chk("no ReadoutDone before start of acquisition", done, 0);
      pi.write(0, 0, 1, 32'h1);
      chk("ReadoutDone", done, 1);
      pi.read(0, 0, 7'h41, x); chk("ReadoutDone over SPI", x[0], 1);
      waiting <= 1;
    end
    pi.write(0, 0, 1, 32'h2);
    ipb.read(0, IPB_TRIGCNT, x, e); chk("configuration clears the counter", x, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
