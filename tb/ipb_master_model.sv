// ipb_master_model: stands in for the IPbus core (and the DAQ server behind it) in testbenches.
//
// Drives NBUS IPbus slave buses synchronously to clk; the buses can be used concurrently.
// read(bus, addr, data, err) raises the strobe on a falling clock edge, waits for ipb_ack
// (sampled on falling edges), returns the data and drops the strobe on that same falling edge,
// so a one-clock-ack slave gives one access per two clocks. A watchdog of 64 clocks returns
// err = 1 if no ack comes. write() is the same with ipb_write set.
module ipb_master_model
  import hgc_pkg::*;
#(
  parameter int unsigned NBUS = 1
) (
  input  logic                   clk,
  output ipb_wbus_t [NBUS-1:0]   w,
  input  ipb_rbus_t [NBUS-1:0]   r
);
  initial w = '0;

  task automatic access(input int bus, input logic wr, input logic [31:0] addr,
                        input logic [31:0] wdata, output logic [31:0] rdata, output logic err);
    int n;
    // Bus signals change on the falling edge, half a clock away from the slave's sampling
    // edge, with blocking assignments so that concurrent accesses on different buses never
    // overwrite each other's fields.
    @(negedge clk);
    w[bus].ipb_addr   = addr;
    w[bus].ipb_wdata  = wdata;
    w[bus].ipb_write  = wr;
    w[bus].ipb_strobe = 1'b1;
    n = 0;
    do begin
      @(negedge clk);
      n++;
    end while (!r[bus].ipb_ack && n < 64);
    rdata = r[bus].ipb_rdata;
    err   = r[bus].ipb_err || !r[bus].ipb_ack;
    w[bus].ipb_strobe = 1'b0;
  endtask

  task automatic read(input int bus, input logic [31:0] addr, output logic [31:0] data, output logic err);
    access(bus, 1'b0, addr, 32'h0, data, err);
  endtask

  task automatic write(input int bus, input logic [31:0] addr, input logic [31:0] data);
    logic [31:0] d; logic e;
    access(bus, 1'b1, addr, data, d, e);
  endtask
endmodule
