// tb_event_packer: self-checking test of the event word assembler.
//
// Applies random flags, timestamps and write strobes; one cycle after each
// strobe with a non-zero flag field the word must be valid and equal to the
// flags in bits 63:32 and the timestamp in bits 31:0 (checked on the raw
// 64-bit vector, independently of the struct). A strobe with zero flags,
// or no strobe, must give no valid word.
module tb_event_packer;
  logic clk = 0, rst_n = 0, wr = 0;
  logic [31:0] flags = '0, timestamp = '0;
  neuro_pkg::event_t word;
  logic word_valid;
  logic [63:0] exp_word;
  logic exp_valid;
  int checks = 0, failures = 0;

  event_packer dut (.clk, .rst_n, .wr, .flags, .timestamp, .word, .word_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      wr = $urandom_range(2) == 0;
      flags = ($urandom_range(4) == 0) ? '0 : $urandom;
      timestamp = $urandom;
      exp_valid = wr && (flags != 0);
      exp_word = {flags, timestamp};
      @(posedge clk); #1;
      checks++;
      if (word_valid !== exp_valid || (exp_valid && 64'(word) !== exp_word)) begin
        failures++;
        $display("FAIL valid=%b exp %b word=%h exp %h", word_valid, exp_valid, 64'(word), exp_word);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
