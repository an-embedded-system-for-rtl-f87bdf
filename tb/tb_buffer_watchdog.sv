// tb_buffer_watchdog: self-checking test of the overflow/underrun watchdog.
//
// Random overflow, underrun and clear pulses are applied with a 4-bit
// counter so that saturation is reached. A reference of two sticky bits
// and a saturating count is kept in the testbench; `led` and `err_count`
// are compared after every edge. Clear wins over an event in the same
// cycle.
module tb_buffer_watchdog;
  logic clk = 0, rst_n = 0, overflow = 0, underrun = 0, clr = 0;
  logic [1:0] led;
  logic [3:0] err_count;
  bit ovf_m = 0, unf_m = 0;
  int cnt_m = 0;
  int checks = 0, failures = 0, n_sat = 0;

  buffer_watchdog #(.CNT_W(4)) dut (.clk, .rst_n, .overflow, .underrun, .clr, .led, .err_count);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      overflow = $urandom_range(9) == 0;
      underrun = $urandom_range(19) == 0;
      clr      = $urandom_range(199) == 0;
      @(posedge clk);
      if (clr) begin ovf_m = 0; unf_m = 0; cnt_m = 0; end
      else begin
        if (overflow) ovf_m = 1;
        if (underrun) unf_m = 1;
        if ((overflow || underrun) && cnt_m < 15) cnt_m++;
      end
      if (cnt_m == 15) n_sat++;
      #1;
      checks++;
      if (led !== {unf_m, ovf_m} || err_count !== 4'(cnt_m)) begin
        failures++;
        $display("FAIL t=%0t led=%b exp %b%b count=%0d exp %0d", $time, led, unf_m, ovf_m, err_count, cnt_m);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL counter never saturated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
