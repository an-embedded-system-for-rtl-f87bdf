// tb_stim_fifo: self-checking test of the stimulus FIFO and output register.
//
// A queue of at most 2 samples is the reference. Random host writes
// (`enq`) and sync dequeues (`deq`) are applied; after each edge
// `stim_out` must hold the last dequeued sample (or 0 before the first),
// `empty`/`full` must match the queue, an enqueue into a full FIFO without
// a simultaneous dequeue must pulse `overflow` and be lost, a dequeue of an
// empty FIFO must pulse `underrun` and leave the output unchanged. The
// output must change exactly one edge after the dequeue.
module tb_stim_fifo;
  localparam int D = 2;
  logic clk = 0, rst_n = 0, enq = 0, deq = 0;
  logic [7:0] din = '0, stim_out;
  logic empty, full, overflow, underrun;
  logic [7:0] q [$];
  logic [7:0] out_m = '0;
  int checks = 0, failures = 0, n_ovf = 0, n_unf = 0, n_deq = 0;

  stim_fifo #(.WIDTH(8), .DEPTH(D)) dut (
    .clk, .rst_n, .enq, .din, .deq, .stim_out, .empty, .full, .overflow, .underrun);

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

  task automatic cycle(input logic e, input logic d, input logic [7:0] v);
    bit exp_ovf, exp_unf, do_d;
    @(negedge clk);
    enq = e; deq = d; din = v;
    #1;
    do_d    = d && q.size() > 0;
    exp_unf = d && q.size() == 0;
    exp_ovf = e && q.size() == D && !do_d;
    checks++; if (empty !== (q.size() == 0)) fail("empty");
    checks++; if (full !== (q.size() == D)) fail("full");
    checks++; if (overflow !== exp_ovf) fail("overflow pulse");
    checks++; if (underrun !== exp_unf) fail("underrun pulse");
    checks++; if (stim_out !== out_m) fail($sformatf("stim_out=%h exp %h before edge", stim_out, out_m));
    if (exp_ovf) n_ovf++;
    if (exp_unf) n_unf++;
    @(posedge clk);
    if (do_d) begin out_m = q.pop_front(); n_deq++; end
    if (e && !exp_ovf) q.push_back(v);
    #1;
    checks++; if (stim_out !== out_m) fail($sformatf("stim_out=%h exp %h after edge", stim_out, out_m));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    cycle(0, 1, 0);                       // underrun at start, output stays 0
    cycle(1, 0, 8'h5a);
    cycle(1, 0, 8'ha5);
    cycle(1, 0, 8'hff);                   // overflow
    cycle(1, 1, 8'h3c);                   // enqueue while full and dequeuing
    for (int i = 0; i < 5000; i++)
      cycle($urandom_range(2) != 0, $urandom_range(2) != 0, 8'($urandom));
    checks++;
    if (n_ovf < 2 || n_unf < 2 || n_deq < 100) fail("random traffic too thin");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
