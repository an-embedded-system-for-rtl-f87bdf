// sync_logic_control: the synchronization logic controller.
//
// Works on the synchronized rising-edge pulses of the spike channels and of
// the stimulus-sync line. It
//   * divides the clock by CLK_PER_US to make the 1 us time step and pulses
//     the timestamp counter's `cnt_inc` once per step ("Counter IN");
//   * ORs every channel edge seen during the current microsecond into a
//     flag register; in the last cycle of the microsecond, if any flag is
//     set, it presents the flags and raises `ev_wr` ("Control"), so that the
//     word assembler stores {flags, timestamp} with the timestamp of that
//     microsecond, then starts the next microsecond with empty flags;
//   * turns a stimulus-sync edge into the stimulus FIFO dequeue `stim_deq`
//     and the host request `stim_req`.
// A rising edge of `acq_en` starts an acquisition: counter cleared, divider
// and flags emptied, and from the next cycle on time runs from 0. While
// `acq_en` is low nothing is recorded, the counter stands still, and flags
// of an unfinished microsecond are dropped when it falls. At most one event
// word per microsecond leaves this block, so the FIFO write rate is bounded
// by 1 word/us. The time step, flag width and the three outputs follow the
// paper's block diagram; the start/stop behaviour and the per-microsecond
// flushing are this design's choices.
module sync_logic_control #(
  parameter int unsigned N_CH       = neuro_pkg::FLAG_W,
  parameter int unsigned CLK_PER_US = neuro_pkg::CLK_PER_US_DEFAULT
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        acq_en,     // from host control register
  input  logic [N_CH-1:0]             ch_rise,    // synchronized channel edges
  input  logic                        sync_rise,  // synchronized stimulus-sync edge
  output logic                        running,    // acquisition in progress
  output logic                        cnt_clr,    // Counter IN: clear
  output logic                        cnt_inc,    // Counter IN: 1 us step
  output logic [neuro_pkg::FLAG_W-1:0] flags,     // channels fired this microsecond
  output logic                        ev_wr,      // Control: store {flags, timestamp}
  output logic                        stim_deq,   // stimulus FIFO dequeue
  output logic                        stim_req    // stimulus request to the host
);
  import neuro_pkg::*;

  localparam int unsigned DIV_W = (CLK_PER_US > 1) ? $clog2(CLK_PER_US) : 1;

  logic                acq_q;
  logic [DIV_W-1:0]    div;
  logic [FLAG_W-1:0]   acc;
  logic [FLAG_W-1:0]   rise_ext;
  logic                start, tick;

  initial assert (N_CH >= 1 && N_CH <= FLAG_W)
    else $error("sync_logic_control: N_CH must be 1..%0d", FLAG_W);

  always_comb begin
    rise_ext = '0;
    rise_ext[N_CH-1:0] = ch_rise;
  end

  assign running = acq_q;
  assign start   = acq_en && !acq_q;
  assign tick    = acq_q && (div == DIV_W'(CLK_PER_US - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acq_q <= 1'b0;
      div   <= '0;
      acc   <= '0;
    end else begin
      acq_q <= acq_en;
      if (start || !acq_q || tick) begin
        div <= '0;
        acc <= '0;
      end else begin
        div <= div + 1'b1;
        acc <= acc | rise_ext;
      end
    end
  end

  always_comb begin
    cnt_clr  = start;
    cnt_inc  = tick;
    flags    = acc | rise_ext;
    ev_wr    = tick && (flags != '0);
    stim_deq = acq_q && sync_rise;
    stim_req = acq_q && sync_rise;
  end

endmodule
