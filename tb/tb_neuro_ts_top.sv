// tb_neuro_ts_top: end-to-end test of the whole detector at its default size
// (32 channels, 50 clocks per microsecond, 1024-word event FIFO, 2-sample
// stimulus FIFO).
//
// The testbench plays three parts. A spike source drives pulses on chosen
// channels in chosen microseconds, always 10 to 30 clocks into the
// microsecond so that the synchronizer delay cannot move them across a
// boundary; from this schedule it knows each expected event word. A
// stimulus generator pulses `stim_sync_in`. A host model, standing in for
// the real-time interrupt handler, waits for `irq`, reads STATUS, reads
// FLAGS and TSTAMP while events wait and writes the next stimulus sample
// when a request is pending, then acknowledges - the handler sequence of
// the design. The testbench checks every event word read, the stimulus
// value on `stim_out` after every sync pulse, and the LED/status state
// after the error scenarios.
//
// Scenarios: (1) normal acquisition with several channels in one
// microsecond and repeated pulses of one channel in one microsecond
// (flag merge), closed-loop stimulus refills that keep the stimulus FIFO
// two samples ahead; (2) stop, pulses while
// stopped (ignored), restart (time from 0); (3) host stalled with the
// interrupt masked so that the event FIFO overflows, then drained: the
// oldest 1025 words survive; (4) stimulus FIFO overflow and underrun,
// event FIFO underrun; (5) watchdog clear. Each mechanism is counted and
// a mechanism that never happened is a failure.
module tb_neuro_ts_top;
  import neuro_pkg::*;
  localparam int CPU = CLK_PER_US_DEFAULT;

  logic clk = 0, rst_n = 0;
  logic [31:0] spike_in = '0;
  logic stim_sync_in = 0;
  logic [2:0]  avs_address = '0;
  logic        avs_read = 0, avs_write = 0;
  logic [31:0] avs_writedata = '0, avs_readdata;
  logic        avs_readdatavalid, irq;
  logic [7:0]  stim_out;
  logic [3:0]  ledr;

  neuro_ts_top dut (.*);

  always #10 clk = ~clk;   // 50 MHz

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_events = 0, n_multi = 0, n_repeat = 0, n_refill = 0, n_sync = 0;
  int n_stopped = 0, n_restart = 0, n_ev_ovf = 0, n_ev_unf = 0;
  int n_stim_ovf = 0, n_stim_unf = 0, n_wdog_clr = 0, n_irq = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    $display("FAIL t=%0t %s", $time, msg);
  endtask

  // ---------------- host bus model ----------------
  semaphore bus = new(1);

  task automatic bus_rd(input int a, output logic [31:0] d);
    bus.get(1);
    @(negedge clk);
    avs_address = 3'(a); avs_read = 1;
    @(negedge clk);
    avs_read = 0;
    checks++;
    if (!avs_readdatavalid) fail("readdatavalid missing");
    d = avs_readdata;
    bus.put(1);
  endtask

  task automatic bus_wr(input int a, input logic [31:0] d);
    bus.get(1);
    @(negedge clk);
    avs_address = 3'(a); avs_write = 1; avs_writedata = d;
    @(negedge clk);
    avs_write = 0;
    bus.put(1);
  endtask

  // ---------------- expected events ----------------
  typedef struct { logic [31:0] flags; logic [31:0] ts; } exp_ev_t;
  exp_ev_t exp_q [$];
  longint t0;   // first clock edge of microsecond 0

  // Start acquisition (and set the interrupt enable); returns with t0 set.
  task automatic start_acq(input bit irq_on);
    bus.get(1);
    @(negedge clk);
    avs_address = 3'(REG_CONTROL); avs_write = 1; avs_writedata = {30'b0, irq_on, 1'b1};
    @(posedge clk);
    t0 = cyc + 1;   // acq_en registers at this edge, time 0 starts at the next
    @(negedge clk);
    avs_write = 0;
    bus.put(1);
  endtask

  // Drive the channels in `mask` during microsecond `us`; `twice` repeats
  // the pulse within the same microsecond.
  task automatic spikes(input int us, input logic [31:0] mask, input bit twice, input bit expect_ev);
    longint at;
    at = t0 + longint'(us) * CPU + 10 + $urandom_range(8);
    while (cyc < at) @(negedge clk);
    spike_in = spike_in | mask;
    repeat (3) @(negedge clk);
    spike_in = spike_in & ~mask;
    if (twice) begin
      repeat (3) @(negedge clk);
      spike_in = spike_in | mask;
      repeat (3) @(negedge clk);
      spike_in = spike_in & ~mask;
      n_repeat++;
    end
    if (expect_ev) exp_q.push_back('{mask, 32'(us)});
    else n_stopped++;
    if ($countones(mask) > 1) n_multi++;
  endtask

  task automatic check_event(input logic [31:0] f, input logic [31:0] t);
    exp_ev_t e;
    checks++;
    if (exp_q.size() == 0) begin fail($sformatf("unexpected event %h@%0d", f, t)); return; end
    e = exp_q.pop_front();
    if (f !== e.flags || t !== e.ts)
      fail($sformatf("event %h@%0d, expected %h@%0d", f, t, e.flags, e.ts));
    n_events++;
  endtask

  // ---------------- stimulus model ----------------
  int stim_written = 0, stim_dequeued = 0;
  bit host_refill = 1;
  function automatic logic [7:0] sample(input int k);
    return 8'(k * 37 + 5);
  endfunction

  task automatic sync_pulse(input bit expect_new);
    logic [7:0] prev_out;
    prev_out = stim_out;
    @(negedge clk) stim_sync_in = 1;
    repeat (4) @(negedge clk);
    stim_sync_in = 0;
    repeat (4) @(negedge clk);
    n_sync++;
    checks++;
    if (expect_new) begin
      if (stim_out !== sample(stim_dequeued))
        fail($sformatf("stim_out=%h exp %h (sample %0d)", stim_out, sample(stim_dequeued), stim_dequeued));
      stim_dequeued++;
    end else if (stim_out !== prev_out) fail("stim_out changed on an underrun");
  endtask

  // ---------------- interrupt handler model ----------------
  bit handler_on = 0;
  initial begin
    logic [31:0] st, f, t;
    forever begin
      @(negedge clk);
      if (handler_on && irq) begin
        n_irq++;
        bus_rd(REG_STATUS, st);
        while (st[0]) begin
          bus_rd(REG_FLAGS, f);
          bus_rd(REG_TSTAMP, t);
          check_event(f, t);
          bus_rd(REG_STATUS, st);
        end
        if (st[1]) begin
          if (host_refill) begin
            bus_wr(REG_STIM, 32'(sample(stim_written)));
            stim_written++;
            n_refill++;
          end
          bus_wr(REG_IRQACK, 32'h1);
        end
      end
    end
  end

  task automatic expect_leds(input logic [3:0] exp, input string when);
    repeat (2) @(negedge clk);
    checks++;
    if (ledr !== exp) fail($sformatf("%s: ledr=%b exp %b", when, ledr, exp));
  endtask

  initial begin
    logic [31:0] d, f, t;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    expect_leds(4'b0000, "after reset");

    // (1) closed loop: preload two samples, start, spikes and syncs
    bus_wr(REG_STIM, 32'(sample(0)));
    bus_wr(REG_STIM, 32'(sample(1)));
    stim_written = 2;
    handler_on = 1;
    start_acq(1);
    fork
      begin
        spikes(3, 32'h0000_0001, 0, 1);
        spikes(7, 32'h8000_0010, 0, 1);
        spikes(8, 32'h0000_0004, 1, 1);
        for (int us = 12; us < 400; us += 1 + $urandom_range(6))
          spikes(us, ($urandom_range(3) == 0) ? $urandom : (32'h1 << $urandom_range(31)),
                 $urandom_range(7) == 0, 1);
      end
      begin
        for (int k = 0; k < 15; k++) begin
          repeat (20 * CPU + $urandom_range(200)) @(negedge clk);
          sync_pulse(1);
        end
      end
    join
    repeat (4 * CPU) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) fail($sformatf("%0d events never read", exp_q.size()));
    expect_leds(4'b0000, "after closed loop");

    // (2) stop, ignored pulses, restart from time 0
    bus_wr(REG_CONTROL, 32'h2);
    repeat (10) @(negedge clk);
    t0 = cyc;
    spikes(2, 32'h0000_00ff, 0, 0);
    repeat (3 * CPU) @(negedge clk);
    bus_rd(REG_LEVEL, d);
    checks++; if (d != 0) fail("event recorded while stopped");
    start_acq(1);
    n_restart++;
    spikes(0, 32'h0000_0100, 0, 1);
    spikes(5, 32'h0000_0200, 0, 1);
    repeat (4 * CPU) @(negedge clk);
    checks++; if (exp_q.size() != 0) fail("events after restart not read");

    // (3) host stalled: mask the interrupt and overflow the event FIFO
    handler_on = 0;
    bus_wr(REG_CONTROL, 32'h1);
    for (int us = 10; us < 10 + 1100; us++) spikes(us, 32'h1 << (us % 32), 0, 1);
    repeat (2 * CPU) @(negedge clk);
    bus_rd(REG_LEVEL, d);
    checks++; if (d != 1025) fail($sformatf("level %0d after overflow, exp 1025", d));
    bus_rd(REG_WDOG, d);
    checks++; if (d[15:0] != 16'd75) fail($sformatf("event watchdog count %0d, exp 75", d[15:0]));
    else n_ev_ovf++;
    expect_leds(4'b0001, "after event overflow");
    for (int i = 0; i < 1025; i++) begin
      bus_rd(REG_FLAGS, f);
      bus_rd(REG_TSTAMP, t);
      check_event(f, t);
    end
    checks++; if (exp_q.size() != 75) fail($sformatf("%0d dropped words, exp 75", exp_q.size()));
    exp_q.delete();
    // one read too many: event FIFO underrun
    bus_rd(REG_TSTAMP, t);
    checks++; if (t != 0) fail("read of empty FIFO returned data");
    expect_leds(4'b0011, "after event underrun");
    n_ev_unf++;

    // (4) stimulus FIFO: the closed loop kept it two samples ahead, so it
    // is full; one more sample -> overflow
    bus_rd(REG_STATUS, d);
    checks++; if (!d[2]) fail("stimulus FIFO not full before the overflow test");
    bus_wr(REG_STIM, 32'h0000_00ee);
    expect_leds(4'b0111, "after stimulus overflow");
    n_stim_ovf++;
    sync_pulse(1);
    sync_pulse(1);
    sync_pulse(0);   // nothing left: underrun, output held
    expect_leds(4'b1111, "after stimulus underrun");
    n_stim_unf++;
    bus_rd(REG_STATUS, d);
    checks++; if (d[8:5] != 4'b1111 || !d[1]) fail($sformatf("status %h after errors", d));

    // (5) clear the watchdogs and the request
    bus_wr(REG_IRQACK, 32'h3);
    expect_leds(4'b0000, "after watchdog clear");
    bus_rd(REG_WDOG, d);
    checks++; if (d != 0) fail("watchdog counters not cleared");
    else n_wdog_clr++;
    checks++; if (irq) fail("irq still high with nothing pending");

    // every mechanism must have happened
    begin
      int cnt [string];
      cnt["event"] = n_events; cnt["multi_channel_merge"] = n_multi;
      cnt["repeat_pulse_merge"] = n_repeat; cnt["stimulus_refill"] = n_refill;
      cnt["sync_dequeue"] = n_sync; cnt["ignored_while_stopped"] = n_stopped;
      cnt["restart"] = n_restart; cnt["event_overflow"] = n_ev_ovf;
      cnt["event_underrun"] = n_ev_unf; cnt["stim_overflow"] = n_stim_ovf;
      cnt["stim_underrun"] = n_stim_unf; cnt["watchdog_clear"] = n_wdog_clr;
      cnt["interrupt"] = n_irq;
      foreach (cnt[k]) begin
        $display("mechanism %-22s %0d", k, cnt[k]);
        checks++;
        if (cnt[k] == 0) fail($sformatf("mechanism %s never happened", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
