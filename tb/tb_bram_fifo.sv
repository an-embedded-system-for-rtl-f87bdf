// tb_bram_fifo: self-checking test of the block-RAM event FIFO.
//
// Uses a depth of 8 so that full and empty occur often. A queue in the
// testbench is the reference: a write is expected to be stored unless the
// array is full, and then `overflow` must pulse; a read of a non-empty
// FIFO must return the queue's oldest word; a read of an empty FIFO must
// pulse `underrun`. `level` must equal the queue size after every edge.
// Directed parts check the fall-through latency (a word written into an
// empty FIFO is at `dout` two edges later) and the capacity of DEPTH+1
// words; a random part mixes reads and writes with changing bias.
module tb_bram_fifo;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [63:0] din = '0, dout;
  logic not_empty, full, overflow, underrun;
  logic [$clog2(D+2)-1:0] level;
  logic [63:0] q [$];
  int checks = 0, failures = 0, n_ovf = 0, n_unf = 0;

  bram_fifo #(.WIDTH(64), .DEPTH(D)) dut (
    .clk, .rst_n, .wr_en, .din, .rd_en, .dout, .not_empty, .full, .level,
    .overflow, .underrun);

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

  // One cycle: apply w/r at the negedge, check just before the posedge,
  // update the model at the posedge.
  task automatic cycle(input logic w, input logic r, input logic [63:0] d);
    bit exp_ne;
    @(negedge clk);
    wr_en = w; rd_en = r; din = d;
    #1;
    exp_ne = not_empty;  // output side timing is checked by the directed tests
    checks++;
    if (r && not_empty) begin
      if (q.size() == 0) fail("read data with empty model");
      else if (dout !== q[0]) fail($sformatf("dout=%h exp %h", dout, q[0]));
    end
    checks++;
    if (underrun !== (r && !not_empty)) fail("underrun pulse");
    checks++;
    if (overflow !== (w && full)) fail("overflow pulse");
    if (overflow) n_ovf++;
    if (underrun) n_unf++;
    @(posedge clk);
    if (r && exp_ne && q.size() > 0) void'(q.pop_front());
    if (w && !overflow) q.push_back(d);
    #1;
    checks++;
    if (level !== q.size()) fail($sformatf("level=%0d exp %0d", level, q.size()));
  endtask

  initial begin
    logic [63:0] w0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: write one word into the empty FIFO
    w0 = {$urandom, $urandom};
    cycle(1, 0, w0);
    checks++; if (not_empty) fail("word visible after one edge");
    cycle(0, 0, 0);
    checks++; if (!not_empty || dout !== w0) fail("word not at dout after two edges");
    cycle(0, 1, 0);
    // capacity: fill without reading
    for (int i = 0; i < D + 4; i++) cycle(1, 0, {$urandom, $urandom});
    checks++;
    if (q.size() != D + 1 || n_ovf != 3) fail($sformatf("held %0d words, %0d overflows", q.size(), n_ovf));
    // drain, with one read too many
    for (int i = 0; i < D + 2; i++) cycle(0, 1, 0);
    checks++; if (n_unf != 1) fail($sformatf("%0d underruns, exp 1", n_unf));
    // random traffic
    for (int i = 0; i < 4000; i++) begin
      int bias;
      bias = (i / 500) % 3;  // 0: write-heavy, 1: balanced, 2: read-heavy
      cycle($urandom_range(3) < 3 - bias, $urandom_range(3) < 1 + bias, {$urandom, $urandom});
    end
    while (q.size() > 0) cycle(0, 1, 0);
    checks++; if (n_ovf < 5 || n_unf < 2) fail($sformatf("random traffic: %0d overflows, %0d underruns", n_ovf, n_unf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
