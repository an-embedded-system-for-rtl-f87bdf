// event_packer: the word assembler between the controller and the FIFO.
//
// Drawn as a 32+32 -> 64 "DEMUX" in the paper's block diagram. When the
// controller raises `wr`, it captures the 32 channel flags and the 32-bit
// timestamp of the same clock edge into one 64-bit event word and offers it
// to the FIFO with `word_valid` in the next cycle (one register stage, so
// the wide word leaves from a flip-flop). A word with no flag set is never
// produced. The flags occupy the upper half of the word and the timestamp
// the lower half; the paper does not give the order, this is this design's
// choice (see neuro_pkg::event_t).
module event_packer (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr,
  input  logic [neuro_pkg::FLAG_W-1:0] flags,
  input  logic [neuro_pkg::TS_W-1:0]   timestamp,
  output neuro_pkg::event_t            word,
  output logic                         word_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word       <= '0;
      word_valid <= 1'b0;
    end else begin
      word_valid <= wr && (flags != '0);
      if (wr) begin
        word.flags     <= flags;
        word.timestamp <= timestamp;
      end
    end
  end

endmodule
