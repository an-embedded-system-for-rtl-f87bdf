// clock_counter: the 32-bit timestamp counter.
//
// Holds the current time in microseconds. The synchronization logic pulses
// `inc` once per microsecond and `clr` at the start of an acquisition;
// `clr` wins when both are high. The count is registered: the value read
// during the cycle of an `inc` is the microsecond that is ending, the new
// value appears one cycle later. The count wraps from 2^32-1 to 0 (after
// about 71.6 minutes), like any binary counter. The width and the
// 1 us step follow the paper; the clear and wrap behaviour are this
// design's choices.
module clock_counter #(
  parameter int unsigned WIDTH = neuro_pkg::TS_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             inc,
  output logic [WIDTH-1:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   count <= '0;
    else if (clr) count <= '0;
    else if (inc) count <= count + 1'b1;
  end

endmodule
