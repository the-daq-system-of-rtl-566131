// daq_seq.svh: event sequence shared by the system testbenches. It plays the roles of the
// Raspberry Pis (SPI) and of the DAQ server's readout producer (IPbus) around hgcal_daq.
// The boards of an event run concurrently; the cycle time is checked against a 40 Hz rate.
// The including module defines: clk, ext, waiting, trig_copy, NRB, EW, the models `pi_sync`
// (one bus), `pi_rb` (NRB buses, 5 selects: 0 = CTL, 1..4 = DATA oRMs), `ipb` (NRB buses),
// the counters checks/failures, the mechanism counters named below, and mod_mask[NRB].

  int n_accepted = 0, n_dropped_busy = 0, n_disabled_drop = 0, n_zero_fill = 0,
      n_stream_off = 0, n_err_empty = 0, n_ts_checked = 0;
  longint prev_ts [];

  longint max_cycle_clks = 0;   // longest trigger-to-re-armed cycle seen, in clocks
  longint ev_ts [];             // time-stamp read from each board in the current event
  int boards_busy = 0;          // boards whose event cycle is still running

  task automatic chk(input string wh, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %0h vs %0h", wh, got, exp);
    end
  endtask

  task automatic pulse_ext(input int ns);
    ext = 1; #(ns * 1ns); ext = 0;
  endtask

  // Pi: configure sync board and every readout board
  task automatic configure();
    pi_sync.write(0, 0, 1, 32'((1 << NRB) - 1));     // board-enable mask
    pi_sync.write(0, 0, 0, 32'h0);                    // triggers enabled
    for (int b = 0; b < NRB; b++) begin
      pi_rb.write(b, 0, 0, 32'(mod_mask[b]));         // CTL: module enable
      for (int k = 0; k < 4; k++) pi_rb.write(b, 1 + k, 0, 32'(mod_mask[b][2*k +: 2]));
      pi_rb.write(b, 0, 1, 32'h2);                    // configuration: clear time-stamp, counter
    end
    prev_ts = new[NRB];
    foreach (prev_ts[b]) prev_ts[b] = -1;
  endtask

  // one complete readout cycle; ev is the event number the ASIC models are at
  // One board's share of an event: its Pi requests the module data, the server reads and
  // checks the whole event, then the Pi resets the ASICs and signals start of acquisition.
  task automatic board_cycle(input int b, input int ev);
    logic [31:0] x; logic e;
    int polls = 0;
    for (int k = 0; k < 4; k++) begin
      if (mod_mask[b][2*k +: 2] == 0) begin n_stream_off++; continue; end
      pi_rb.read(b, 1 + k, 7'h41, x);
      chk("trigger pending at DATA oRM", x[1:0], 2'b11);
      pi_rb.write(b, 1 + k, 1, 32'h1);
    end
    do begin ipb.read(b, hgc_pkg::IPB_STATUS, x, e); polls++; end while (!x[0] && polls < 100000);
    chk("data ready", x[0], 1);
    ipb.read(b, hgc_pkg::IPB_TRIGCNT, x, e); chk("trigger count", x, ev);
    ipb.read(b, hgc_pkg::IPB_TS_LO, x, e); ev_ts[b][31:0] = x;
    ipb.read(b, hgc_pkg::IPB_TS_HI, x, e); ev_ts[b][63:32] = x;
    for (int n = 0; n < EW; n++) begin
      ipb.read(b, hgc_pkg::IPB_FIFO, x, e);
      chk($sformatf("board %0d event %0d word %0d", b, ev, n), x, tb_pkg::exp_ctl_word(b, mod_mask[b], ev, n));
      chk("no bus error", e, 0);
    end
    for (int m = 0; m < 8; m++) if (!mod_mask[b][m]) n_zero_fill++;
    ipb.read(b, hgc_pkg::IPB_FIFO, x, e);
    chk("read past the event errs", e, 1);
    if (e) n_err_empty++;
    for (int k = 0; k < 4; k++) if (mod_mask[b][2*k +: 2] != 0) pi_rb.write(b, 1 + k, 1, 32'h2);
    chk("no ReadoutDone before start of acquisition", waiting, 0);
    pi_rb.write(b, 0, 1, 32'h1);
  endtask

  task automatic run_event(input int ev, input bit extra_trigger);
    logic [31:0] x; logic e;
    int t0;
    realtime t_trig;
    longint cycle_clks;
    ev_ts = new[NRB];
    chk("waiting before trigger", waiting, 1);
    t0 = n_trig_seen;
    t_trig = $realtime;
    pulse_ext($urandom_range(30, 120));
    #(300ns);
    chk("trigger accepted", n_trig_seen - t0, 1);
    if (n_trig_seen - t0 == 1) n_accepted++;
    chk("waiting low during readout", waiting, 0);
    if (extra_trigger) begin
      pulse_ext(80); #(300ns);
      chk("second trigger dropped", n_trig_seen - t0, 1);
      if (n_trig_seen - t0 == 1) n_dropped_busy++;
    end
    // Each board runs on its own from here, as the boards' Pis and the server's readout
    // producers do: Pi readout request, server readout and check, Pi re-arm.
    for (int bb = 0; bb < NRB; bb++) begin
      boards_busy++;
      fork
        automatic int b = bb;
        begin board_cycle(b, ev); boards_busy--; end
      join_none
    end
    wait (boards_busy == 0);
    // synchronisation check: the time since the previous trigger is the same on every board
    // (the boards were configured, and their time-stamps cleared, at different times)
    if (prev_ts[0] >= 0)
      for (int b = 1; b < NRB; b++) begin
        chk("time-stamp differences agree", ev_ts[b] - prev_ts[b], ev_ts[0] - prev_ts[0]);
        n_ts_checked++;
      end
    foreach (ev_ts[b]) prev_ts[b] = ev_ts[b];
    repeat (10) @(posedge clk);
    chk("sync board ready for the next trigger", waiting, 1);
    // rate: the whole cycle, trigger to re-armed sync board, must fit the 25 ms (1,000,000
    // clocks) between triggers of a 40 Hz run
    cycle_clks = longint'(($realtime - t_trig) / 25.0ns);
    if (cycle_clks > max_cycle_clks) max_cycle_clks = cycle_clks;
    chk("cycle fits a 40 Hz trigger rate", cycle_clks <= 1_000_000, 1);
  endtask
