// tb_digital_in_sync: self-checking test of the input synchronizer.
//
// Four channels receive random pulses (high and low phases of 1 to 6
// cycles, changed between clock edges). A history of the pin values sampled
// at each rising clock edge gives the expected outputs: after edge k,
// `level` is the sample of edge k-1 and `rise` is high when that sample is
// 1 and the one before is 0 (three register stages from pin to pulse).
// The number of `rise` pulses per channel must also equal the number of
// pulses driven.
module tb_digital_in_sync;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] pin = '0, level, rise;
  int checks = 0, failures = 0;
  logic [N-1:0] h0 = '0, h1 = '0, h2 = '0;   // samples at edges k, k-1, k-2
  int pulses [N], seen [N];
  int left [N];

  digital_in_sync #(.N_IN(N), .SYNC_STAGES(2)) dut (.clk, .rst_n, .pin, .level, .rise);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin pulses[i] = 0; seen[i] = 0; left[i] = 1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        left[i]--;
        if (left[i] == 0) begin
          if (!pin[i]) pulses[i]++;
          pin[i] = ~pin[i];
          left[i] = 1 + int'($urandom_range(5));
        end
      end
    end
    @(negedge clk) pin = '0;
    repeat (6) @(posedge clk);
    #1;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (seen[i] != pulses[i]) begin
        failures++;
        $display("FAIL ch%0d: %0d rising edges seen, %0d pulses driven", i, seen[i], pulses[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    h2 = h1; h1 = h0; h0 = pin;
    #1;
    checks++;
    if (level !== h1 || rise !== (h1 & ~h2)) begin
      failures++;
      $display("FAIL t=%0t level=%b exp %b rise=%b exp %b", $time, level, h1, rise, h1 & ~h2);
    end
    for (int i = 0; i < N; i++) if (rise[i]) seen[i]++;
  end
endmodule
