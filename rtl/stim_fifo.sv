// stim_fifo: the stimulus register FIFO and the Digital OUT register.
//
// The host writes stimulus samples ahead of time with `enq`; the external
// stimulus-sync pulse, turned into `deq` by the synchronization logic,
// copies the oldest sample to the output register `stim_out` in the next
// cycle, so every sample reaches the stimulus pins at a time fixed by the
// hardware, not by software latency. Between dequeues the output holds its
// value. A dequeue with no sample waiting leaves the output unchanged and
// pulses `underrun`; an enqueue into a full FIFO is dropped and pulses
// `overflow`. Both go to this FIFO's watchdog. The FIFO is built from
// DEPTH registers (a small register FIFO, as the paper names it) with a
// circular index. The 8-bit width and the dequeue-to-output behaviour
// follow the paper; the depth of 2 and the reset value 0 of the output are
// this design's choices.
module stim_fifo #(
  parameter int unsigned WIDTH = neuro_pkg::STIM_W,
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enq,
  input  logic [WIDTH-1:0] din,
  input  logic             deq,
  output logic [WIDTH-1:0] stim_out,
  output logic             empty,
  output logic             full,
  output logic             overflow,
  output logic             underrun
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] regs [DEPTH];
  logic [PTR_W-1:0] head, tail;
  logic [CNT_W-1:0] count;
  logic             do_enq, do_deq;

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty  = (count == '0);
  assign full   = (count == CNT_W'(DEPTH));
  assign do_deq = deq && !empty;
  // A sample may enter a full FIFO in the cycle the head leaves it.
  assign do_enq = enq && (!full || do_deq);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) regs[i] <= '0;
      head     <= '0;
      tail     <= '0;
      count    <= '0;
      stim_out <= '0;
    end else begin
      if (do_enq) begin
        regs[tail] <= din;
        tail       <= next_ptr(tail);
      end
      if (do_deq) begin
        stim_out <= regs[head];
        head     <= next_ptr(head);
      end
      count <= count + CNT_W'(do_enq) - CNT_W'(do_deq);
    end
  end

  assign overflow = enq && !do_enq;
  assign underrun = deq && empty;

endmodule
