// tb_ipbus_interface: the CTL oRM's IPbus register block against queue models of the four
// DataFIFOs. Checks trigger count and time-stamp registers, that "data ready" rises only when
// every enabled stream holds a full event, that each FIFO read returns the 32-bit word with
// headers dropped and module i in nibble 7-i (disabled modules zero), that an empty stream
// gives ipb_err, and that ReadoutDone needs both the full read and the start-of-acquisition.
`timescale 1ns/1ps
module tb_ipbus_interface;
  import hgc_pkg::*;
  localparam int EW = 40;
  logic clk = 0, rst = 1, trig = 0, cfg = 0, acq = 0, waiting = 0, fifo_rd, done;
  logic [7:0] mod_en = 8'hFF;
  logic [31:0] tcount = 0;
  logic [3:0][15:0] fd;
  logic [3:0] fe;
  logic [3:0][15:0] fc;
  ipb_wbus_t [0:0] w; ipb_rbus_t [0:0] r;
  always #12.5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] q [4][$];
  longint cyc = 0;

  ipbus_interface #(.EVENT_WORDS(EW), .CW(16)) dut (.clk, .rst, .ipb_w(w[0]), .ipb_r(r[0]),
    .trig_i(trig), .cfg_i(cfg), .acq_start_i(acq), .waiting_i(waiting), .mod_en_i(mod_en),
    .trig_count_i(tcount), .fifo_data_i(fd), .fifo_empty_i(fe), .fifo_count_i(fc),
    .fifo_rd_o(fifo_rd), .readout_done_o(done));
  ipb_master_model #(.NBUS(1)) ipb (.clk, .w, .r);

  always_comb for (int s = 0; s < 4; s++) begin
    fe[s] = (q[s].size() == 0);
    fd[s] = fe[s] ? 16'h0 : q[s][0];
    fc[s] = 16'(q[s].size());
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (fifo_rd) for (int s = 0; s < 4; s++) if (mod_en[2*s] | mod_en[2*s+1]) void'(q[s].pop_front());
  end

  task automatic chk(input string wh, input logic [63:0] got, input logic [63:0] exp);
    checks++; if (got !== exp) begin failures++; if (failures < 20) $display("FAIL %s: %h vs %h", wh, got, exp); end
  endtask
  function automatic logic [31:0] ref_word(input logic [3:0][15:0] d, input logic [7:0] en);
    logic [31:0] x = 0;
    for (int m = 0; m < 8; m++) if (en[m]) x[31-4*m -: 4] = (m % 2 == 0) ? d[m/2][11:8] : d[m/2][3:0];
    return x;
  endfunction

  initial begin
    #(5ms); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] v; logic e; longint t_trig;
    repeat (3) @(posedge clk); rst <= 0; repeat (2) @(posedge clk);
    cfg <= 1; @(posedge clk); cfg <= 0;
    for (int ev = 0; ev < 4; ev++) begin
      logic [3:0][15:0] words [$];
      words.delete();
      mod_en <= (ev == 2) ? 8'b0011_0110 : 8'hFF;
      repeat (20) @(posedge clk);
      trig <= 1; tcount <= tcount + 1; t_trig = cyc; @(posedge clk); trig <= 0;
      ipb.read(0, IPB_TRIGCNT, v, e); chk("trigcnt", v, tcount);
      ipb.read(0, IPB_TS_LO, v, e);   chk("ts lo", v, 32'(t_trig - 5));
      ipb.read(0, IPB_TS_HI, v, e);   chk("ts hi", v, 0);
      // fill all streams except one partially, data ready must stay low
      for (int n = 0; n < EW; n++) begin
        logic [3:0][15:0] x;
        for (int s = 0; s < 4; s++) x[s] = {4'b1000, 4'($urandom), 4'b1000, 4'($urandom)};
        words.push_back(x);
        for (int s = 0; s < 4; s++) if (s != 3 || n < EW - 1) q[s].push_back(x[s]);
      end
      repeat (3) @(posedge clk);
      ipb.read(0, IPB_STATUS, v, e);
      chk("not ready with a short stream", v[0], (mod_en[7:6] == 0) ? 1 : 0);
      q[3].push_back(words[EW-1][3]);
      repeat (3) @(posedge clk);
      ipb.read(0, IPB_STATUS, v, e); chk("data ready", v[0], 1);
      for (int n = 0; n < EW; n++) begin
        ipb.read(0, IPB_FIFO, v, e);
        chk($sformatf("ev %0d word %0d", ev, n), v, ref_word(words[n], mod_en));
        chk("no err", e, 0);
        if (n == EW / 2 && ev == 1) begin acq <= 1; @(posedge clk); acq <= 0; end
      end
      ipb.read(0, IPB_NREAD, v, e); chk("nread", v, EW);
      ipb.read(0, IPB_FIFO, v, e); chk("read of empty FIFO errs", e, 1);
      repeat (3) @(posedge clk);
      if (ev != 1) begin
        chk("no ReadoutDone before start of acquisition", done, 0);
        acq <= 1; @(posedge clk); acq <= 0;
      end
      repeat (2) @(posedge clk);
      chk("ReadoutDone", done, 1);
      ipb.read(0, IPB_STATUS, v, e); chk("status done", v[2], 1);
      for (int s = 0; s < 4; s++) q[s].delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
