// buffer_watchdog: overflow/underrun watchdog of one buffer.
//
// One instance watches each FIFO. A one-cycle `overflow` or `underrun`
// pulse from the FIFO sets a sticky flag that stays set until the host
// clears it (`clr`), so a red status LED tells the experimenter afterwards
// that data were lost or a stimulus sample was late in this run, even if
// it happened only once. The flags drive `led[0]` (overflow) and `led[1]`
// (underrun) directly. A saturating counter of all error events lets the
// host see how many occurred. The paper names a pair of watchdogs driving
// red LEDs on buffer overflow or underrun; the sticky flags, the LED
// assignment and the event counter are this design's choices. `clr` has
// priority over an event in the same cycle.
module buffer_watchdog #(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             overflow,
  input  logic             underrun,
  input  logic             clr,
  output logic [1:0]       led,        // {underrun seen, overflow seen}
  output logic [CNT_W-1:0] err_count   // saturating count of error events
);

  logic ovf_seen, unf_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ovf_seen  <= 1'b0;
      unf_seen  <= 1'b0;
      err_count <= '0;
    end else if (clr) begin
      ovf_seen  <= 1'b0;
      unf_seen  <= 1'b0;
      err_count <= '0;
    end else begin
      if (overflow) ovf_seen <= 1'b1;
      if (underrun) unf_seen <= 1'b1;
      if ((overflow || underrun) && err_count != '1)
        err_count <= err_count + 1'b1;
    end
  end

  assign led = {unf_seen, ovf_seen};

endmodule
