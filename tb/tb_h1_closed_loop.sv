// tb_h1_closed_loop: a closed-loop run shaped like the blowfly H1 experiment.
//
// The design at its default size records one spiking neuron on channel 0
// for 300 ms while driving the 8 stimulus outputs (the board's green
// LEDs). The spike train has inter-spike intervals of 1 to 8 ms with
// occasional bursts of 2 to 3 ms intervals. A stimulus-sync pulse every
// 2 ms moves a single lit LED one step back and forth across the 8 LEDs
// (an oscillating light point). The host model is an interrupt handler: it
// reads every event, and on each stimulus request writes the next sample.
// As a small pattern-matching feedback rule, when the last two intervals
// it has seen are both below 4 ms it sends one all-LEDs flash instead of
// the next point position. The testbench checks each event's flag and
// microsecond timestamp against the spike schedule, checks that
// `stim_out` shows the samples in the order the host wrote them, one per
// sync pulse, and that no watchdog LED lit. The spike rates and timings are
// illustrative; they are not measured values.
module tb_h1_closed_loop;
  import neuro_pkg::*;
  localparam int CPU = CLK_PER_US_DEFAULT;
  localparam int RUN_US = 300_000;
  localparam int SYNC_US = 2_000;

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

  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int n_spikes = 0, n_events = 0, n_flash = 0, n_sync = 0;

  initial begin
    repeat (longint'(RUN_US + 5_000) * CPU) @(posedge clk);
    failures++;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    $display("FAIL t=%0t %s", $time, msg);
  endtask

  task automatic bus_rd(input int a, output logic [31:0] d);
    @(negedge clk);
    avs_address = 3'(a); avs_read = 1;
    @(negedge clk);
    avs_read = 0;
    d = avs_readdata;
  endtask

  task automatic bus_wr(input int a, input logic [31:0] d);
    @(negedge clk);
    avs_address = 3'(a); avs_write = 1; avs_writedata = d;
    @(negedge clk);
    avs_write = 0;
  endtask

  int exp_ts [$];
  logic [7:0] written [$];
  longint t0;

  // host-side stimulus and pattern-matching state
  int pos = 0, dir = 1, last_ts = -1, isi1 = 1 << 30, isi2 = 1 << 30;
  function automatic logic [7:0] next_sample();
    logic [7:0] s;
    if (isi1 < 4000 && isi2 < 4000) begin
      isi1 = 1 << 30;   // one flash per detected burst
      n_flash++;
      return 8'hff;
    end
    s = 8'(1 << pos);
    if (pos + dir > 7 || pos + dir < 0) dir = -dir;
    pos += dir;
    return s;
  endfunction

  task automatic host_write_next();
    logic [7:0] s;
    s = next_sample();
    written.push_back(s);
    bus_wr(REG_STIM, 32'(s));
  endtask

  // interrupt handler
  bit handler_on = 0;
  initial begin
    logic [31:0] st, f, t;
    forever begin
      @(negedge clk);
      if (handler_on && irq) begin
        bus_rd(REG_STATUS, st);
        while (st[0]) begin
          bus_rd(REG_FLAGS, f);
          bus_rd(REG_TSTAMP, t);
          checks++;
          if (exp_ts.size() == 0) fail("unexpected event");
          else begin
            int e;
            e = exp_ts.pop_front();
            if (f !== 32'h1 || t !== 32'(e)) fail($sformatf("event %h@%0d exp 1@%0d", f, t, e));
          end
          n_events++;
          if (last_ts >= 0) begin isi2 = isi1; isi1 = int'(t) - last_ts; end
          last_ts = int'(t);
          bus_rd(REG_STATUS, st);
        end
        if (st[1]) begin
          host_write_next();
          bus_wr(REG_IRQACK, 32'h1);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    host_write_next();
    host_write_next();
    handler_on = 1;
    @(negedge clk);
    avs_address = 3'(REG_CONTROL); avs_write = 1; avs_writedata = 32'h3;
    @(posedge clk) t0 = cyc + 1;
    @(negedge clk) avs_write = 0;
    fork
      // spike train on channel 0
      begin
        int us;
        us = 500;
        while (us < RUN_US - 1000) begin
          longint at;
          at = t0 + longint'(us) * CPU + 10 + $urandom_range(8);
          while (cyc < at) @(negedge clk);
          spike_in[0] = 1;
          repeat (5) @(negedge clk);
          spike_in[0] = 0;
          exp_ts.push_back(us);
          n_spikes++;
          us += ($urandom_range(5) == 0) ? 2000 + $urandom_range(1000) : 1000 + $urandom_range(7000);
        end
      end
      // stimulus sync every 2 ms, away from the spike edges
      begin
        for (int k = 0; k < RUN_US / SYNC_US - 1; k++) begin
          logic [7:0] exp;
          longint at;
          at = t0 + longint'(k + 1) * SYNC_US * CPU + 25;
          while (cyc < at) @(negedge clk);
          stim_sync_in = 1;
          repeat (4) @(negedge clk);
          stim_sync_in = 0;
          repeat (4) @(negedge clk);
          n_sync++;
          checks++;
          if (written.size() == 0) fail("no stimulus sample was written in time");
          else begin
            exp = written.pop_front();
            if (stim_out !== exp) fail($sformatf("stim_out=%h exp %h at sync %0d", stim_out, exp, k));
          end
        end
      end
    join
    repeat (10 * CPU) @(negedge clk);
    checks++; if (exp_ts.size() != 0) fail($sformatf("%0d spikes never read", exp_ts.size()));
    checks++; if (ledr !== 4'b0000) fail($sformatf("watchdog LEDs %b", ledr));
    checks++; if (n_flash == 0) fail("pattern-triggered flash never happened");
    checks++; if (n_events != n_spikes) fail("event count differs from spike count");
    $display("spikes %0d events %0d syncs %0d flashes %0d", n_spikes, n_events, n_sync, n_flash);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
