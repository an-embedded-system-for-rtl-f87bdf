// tb_clock_counter: self-checking test of the timestamp counter.
//
// Drives random `inc` and `clr` pulses and compares `count` after every
// clock edge with a reference count kept in the testbench (clear wins over
// increment), then checks a clean run of 100 steps after a clear. The wrap
// at 2^32 is not reached in simulation.
module tb_clock_counter;
  logic clk = 0, rst_n = 0, clr = 0, inc = 0;
  logic [31:0] count;
  longint unsigned ref_cnt = 0;
  int checks = 0, failures = 0;

  clock_counter dut (.clk, .rst_n, .clr, .inc, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic c, input logic i);
    @(negedge clk); clr = c; inc = i;
    @(posedge clk);
    if (c) ref_cnt = 0; else if (i) ref_cnt = (ref_cnt + 1) % (64'd1 << 32);
    #1;
    checks++;
    if (count !== ref_cnt[31:0]) begin
      failures++;
      $display("FAIL clr=%b inc=%b count=%0d exp %0d", c, i, count, ref_cnt);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1; checks++; if (count !== 0) begin failures++; $display("FAIL reset value %0d", count); end
    repeat (5000) step($urandom_range(30) == 0, $urandom_range(1) == 1);
    step(1'b1, 1'b1);   // clear wins
    repeat (100) step(1'b0, 1'b1);
    checks++;
    if (count !== 32'd100) begin failures++; $display("FAIL after 100 steps %0d", count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
