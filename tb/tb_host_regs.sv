// tb_host_regs: self-checking test of the host register file.
//
// The FIFOs and watchdogs around the register file are replaced by
// testbench signals set to random values. A small Avalon-MM master task
// issues single reads and writes; each read must return, one cycle later
// with `readdatavalid`, the value the register map defines, computed here
// from the stub signals. Strobes to the FIFOs (`ev_rd`, `stim_enq`,
// `wdog_clr`) must appear only for their addresses and in the access
// cycle. The stimulus request must stay pending from the `stim_req` pulse
// until acknowledged, and `irq` must follow enable, pending request and
// waiting events.
module tb_host_regs;
  import neuro_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0]  avs_address = '0;
  logic        avs_read = 0, avs_write = 0;
  logic [31:0] avs_writedata = '0, avs_readdata;
  logic        avs_readdatavalid, irq, acq_en, ev_rd, stim_enq, wdog_clr;
  logic        running = 0, ev_not_empty = 0, stim_full = 0, stim_empty = 1, stim_req = 0;
  event_t      ev_word = '0;
  logic [10:0] ev_level = '0;
  logic [7:0]  stim_din;
  logic [1:0]  ev_wdog_led = '0, stim_wdog_led = '0;
  logic [15:0] ev_wdog_count = '0, stim_wdog_count = '0;
  int checks = 0, failures = 0;
  bit acq_m = 0, irqen_m = 0, pend_m = 0;

  host_regs #(.LEVEL_W(11)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    $display("FAIL t=%0t %s", $time, msg);
  endtask

  task automatic randomize_stubs();
    running = $urandom_range(1); ev_not_empty = $urandom_range(1);
    stim_full = $urandom_range(1); stim_empty = $urandom_range(1);
    ev_word = {$urandom, $urandom}; ev_level = 11'($urandom);
    ev_wdog_led = 2'($urandom); stim_wdog_led = 2'($urandom);
    ev_wdog_count = 16'($urandom); stim_wdog_count = 16'($urandom);
  endtask

  function automatic logic [31:0] expected(input int a);
    case (a)
      0: return ev_not_empty ? ev_word[63:32] : 0;
      1: return ev_not_empty ? ev_word[31:0] : 0;
      2: return {23'b0, stim_wdog_led[1], stim_wdog_led[0], ev_wdog_led[1], ev_wdog_led[0],
                 running, stim_empty, stim_full, pend_m, ev_not_empty};
      3: return {30'b0, irqen_m, acq_m};
      6: return {21'b0, ev_level};
      7: return {stim_wdog_count, ev_wdog_count};
      default: return 0;
    endcase
  endfunction

  task automatic rd(input int a);
    logic [31:0] exp;
    @(negedge clk);
    randomize_stubs();
    avs_address = 3'(a); avs_read = 1;
    #1;
    exp = expected(a);
    checks++; if (ev_rd !== (a == 1)) fail("ev_rd strobe");
    checks++; if (stim_enq || wdog_clr) fail("write strobe on a read");
    @(negedge clk);
    avs_read = 0;
    checks++;
    if (!avs_readdatavalid || avs_readdata !== exp)
      fail($sformatf("read %0d: valid=%b data=%h exp %h", a, avs_readdatavalid, avs_readdata, exp));
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk);
    avs_address = 3'(a); avs_write = 1; avs_writedata = d;
    #1;
    checks++; if (stim_enq !== (a == 4) || (a == 4 && stim_din !== d[7:0])) fail("stim_enq");
    checks++; if (wdog_clr !== (a == 5 && d[1])) fail("wdog_clr");
    checks++; if (ev_rd) fail("ev_rd on a write");
    @(posedge clk);
    if (a == 3) begin acq_m = d[0]; irqen_m = d[1]; end
    if (a == 5 && d[0]) pend_m = 0;
    @(negedge clk);
    avs_write = 0;
    checks++; if (avs_readdatavalid) fail("readdatavalid after a write");
    checks++; if (acq_en !== acq_m) fail("acq_en");
  endtask

  task automatic check_irq();
    #1;
    checks++;
    if (irq !== (irqen_m && (ev_not_empty || pend_m))) fail("irq");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int op;
      op = $urandom_range(9);
      if (op < 5) rd($urandom_range(7));
      else if (op < 8) wr($urandom_range(7), $urandom);
      else begin
        @(negedge clk) stim_req = 1;
        @(posedge clk) pend_m = 1;
        @(negedge clk) stim_req = 0;
      end
      check_irq();
    end
    // request and acknowledge in the same cycle: request wins
    @(negedge clk);
    stim_req = 1; avs_address = 3'd5; avs_write = 1; avs_writedata = 1;
    @(negedge clk);
    stim_req = 0; avs_write = 0; pend_m = 1;
    rd(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
