// tb_sync_logic_control: self-checking test of the synchronization controller.
//
// Runs with 5 clocks per microsecond and 4 channels. Random channel and
// stimulus-sync edges are applied; the testbench keeps its own cycle count
// since the start of the acquisition, from which it knows when each
// microsecond ends (every 5th cycle), and its own OR of the channel edges
// of the current microsecond. It checks every cycle: `cnt_clr` only at
// the start, `cnt_inc` exactly once per 5 cycles (the 1 us rate), `ev_wr`
// and `flags` at the end of each microsecond with activity, `stim_deq` and
// `stim_req` for each sync edge while running. Acquisition is stopped and
// restarted twice to check that nothing is recorded while stopped and that
// time restarts from a clean microsecond.
module tb_sync_logic_control;
  localparam int N = 4, DIV = 5;
  logic clk = 0, rst_n = 0, acq_en = 0, sync_rise = 0;
  logic [N-1:0] ch_rise = '0;
  logic running, cnt_clr, cnt_inc, ev_wr, stim_deq, stim_req;
  logic [31:0] flags;
  int checks = 0, failures = 0;
  int cyc;                 // cycles since the first running cycle
  bit run_m = 0, acq_m = 0;
  logic [31:0] acc_m = '0;
  int n_inc = 0, n_ev = 0, n_deq = 0;

  sync_logic_control #(.N_CH(N), .CLK_PER_US(DIV)) dut (
    .clk, .rst_n, .acq_en, .ch_rise, .sync_rise, .running,
    .cnt_clr, .cnt_inc, .flags, .ev_wr, .stim_deq, .stim_req);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL t=%0t %s=%b exp %b", $time, what, got, exp);
    end
  endtask

  // Reference model evaluated on the inputs just before each clock edge.
  always @(negedge clk) if (rst_n) begin
    logic exp_clr, exp_tick, exp_wr;
    logic [31:0] now;
    #2;  // inputs are set at the negedge, sample them after
    exp_clr  = acq_en && !acq_m;
    exp_tick = run_m && (cyc % DIV == DIV - 1);
    now      = acc_m | 32'(ch_rise);
    exp_wr   = exp_tick && (now != 0);
    check("running", running, run_m);
    check("cnt_clr", cnt_clr, exp_clr);
    check("cnt_inc", cnt_inc, exp_tick);
    check("ev_wr", ev_wr, exp_wr);
    if (exp_wr) begin
      checks++;
      if (flags !== now) begin failures++; $display("FAIL flags=%h exp %h", flags, now); end
    end
    check("stim_deq", stim_deq, run_m && sync_rise);
    check("stim_req", stim_req, run_m && sync_rise);
    if (cnt_inc) n_inc++;
    if (ev_wr) n_ev++;
    if (stim_deq) n_deq++;
    // state update for the next cycle
    if (run_m && !exp_tick) acc_m = now; else acc_m = '0;
    if (run_m) cyc++;
    if (!acq_m && acq_en) cyc = 0;
    run_m = acq_en;
    acq_m = acq_en;
  end

  initial begin
    int inc_before;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 3; phase++) begin
      @(negedge clk) acq_en = 1;
      inc_before = n_inc;
      repeat (1000) begin
        @(negedge clk);
        ch_rise   = ($urandom_range(3) == 0) ? N'($urandom) : '0;
        sync_rise = $urandom_range(20) == 0;
      end
      // rate: 1000 running cycles give 200 microsecond steps
      #3;
      checks++;
      if (n_inc - inc_before != 1000 / DIV) begin
        failures++;
        $display("FAIL %0d steps in 1000 cycles, exp %0d", n_inc - inc_before, 1000 / DIV);
      end
      @(negedge clk) begin acq_en = 0; ch_rise = '0; sync_rise = 0; end
      repeat (50) begin
        @(negedge clk);
        ch_rise   = N'($urandom);
        sync_rise = $urandom_range(1);
      end
      @(negedge clk) begin ch_rise = '0; sync_rise = 0; end
    end
    checks++;
    if (n_ev == 0 || n_deq == 0) begin failures++; $display("FAIL no events or dequeues"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
