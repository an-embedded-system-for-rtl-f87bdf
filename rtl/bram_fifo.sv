// bram_fifo: the block-RAM event FIFO.
//
// Buffers 64-bit event words between the detector, which writes at most
// one word per microsecond, and the host, which reads them over the bus
// when its real-time task gets to run. The storage is an array of DEPTH
// words with one synchronous write port and one synchronous read port, the
// shape an FPGA block RAM implements. A first-word-fall-through register in
// front of the read port always holds the oldest word (`dout`, valid while
// `not_empty`); `rd_en` removes it, and the next word is fetched from the
// array in the same edge. A word written into an empty FIFO appears at
// `dout` two cycles later. `level` counts all stored words, the array plus
// the output register, so up to DEPTH+1 words can be held.
//
// Error handling: a write while the array is full is dropped and pulses
// `overflow`; a read while empty returns nothing and pulses `underrun`.
// These drive the FIFO's watchdog. The paper gives the FIFO, its width and
// its block-RAM home; the depth, the fall-through read and the drop-on-full
// policy are this design's choices.
module bram_fifo #(
  parameter int unsigned WIDTH = neuro_pkg::EVENT_W,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         din,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         dout,
  output logic                     not_empty,
  output logic                     full,
  output logic [$clog2(DEPTH+2)-1:0] level,
  output logic                     overflow,
  output logic                     underrun
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic [CNT_W-1:0] mcount;       // words in the array
  logic             ov;           // output register holds a word
  logic             do_wr, do_pop, do_load;

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign full     = (mcount == CNT_W'(DEPTH));
  assign do_wr    = wr_en && !full;
  assign do_pop   = rd_en && ov;
  assign do_load  = (mcount != '0) && (!ov || do_pop);

  // Array: synchronous write, synchronous read into the output register.
  always_ff @(posedge clk) begin
    if (do_wr)   mem[wr_ptr] <= din;
    if (do_load) dout <= mem[rd_ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      mcount <= '0;
      ov     <= 1'b0;
    end else begin
      if (do_wr)   wr_ptr <= next_ptr(wr_ptr);
      if (do_load) rd_ptr <= next_ptr(rd_ptr);
      mcount <= mcount + CNT_W'(do_wr) - CNT_W'(do_load);
      if (do_load)     ov <= 1'b1;
      else if (do_pop) ov <= 1'b0;
    end
  end

  assign not_empty = ov;
  assign level     = ($clog2(DEPTH+2))'(mcount) + ($clog2(DEPTH+2))'(ov);
  assign overflow  = wr_en && full;
  assign underrun  = rd_en && !ov;

endmodule
