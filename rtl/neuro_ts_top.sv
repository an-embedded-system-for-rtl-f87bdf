// neuro_ts_top: FPGA side of the closed-loop spike timestamp and stimulus system.
//
// Spike pulses from the analog front-end enter on `spike_in`, one line per
// channel, and the stimulus generator's sync pulse on `stim_sync_in`. Both
// are synchronized (digital_in_sync). The controller (sync_logic_control)
// runs a 1 us time base that steps the 32-bit timestamp counter
// (clock_counter) and gathers which channels fired in each microsecond; at
// the end of a microsecond with activity the word assembler (event_packer)
// forms the 64-bit word {flags, timestamp}, which goes into the block-RAM
// event FIFO (bram_fifo). The host reads it through the register file
// (host_regs), whose Avalon-MM slave port and interrupt are the top's bus
// ports; the PCIe-to-Avalon bridge sits outside. In the other direction the
// host writes stimulus samples into a small register FIFO (stim_fifo); each
// stimulus-sync pulse copies the next sample to `stim_out` (the board's 8
// green LEDs in the paper's experiment) and raises an interrupt request so
// the host can supply the following one. Two watchdogs (buffer_watchdog)
// latch FIFO overflow and underrun on the red status LEDs `ledr`:
//   ledr[0] event FIFO overflow   ledr[1] event FIFO underrun
//   ledr[2] stimulus FIFO overflow ledr[3] stimulus FIFO underrun
// Latency from a spike edge to the event word in the FIFO: 3 cycles of
// synchronization and edge detection, the rest of the microsecond, then 2
// cycles. The structure, the widths (32, 32, 64, 8) and the 1 us step follow
// the paper; clock rate, FIFO depths, register map and reset (asynchronous,
// active low) are this design's choices.
module neuro_ts_top #(
  parameter int unsigned N_CH       = 32,
  parameter int unsigned CLK_PER_US = neuro_pkg::CLK_PER_US_DEFAULT,
  parameter int unsigned EV_DEPTH   = 1024,
  parameter int unsigned STIM_DEPTH = 2
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [N_CH-1:0]                  spike_in,
  input  logic                             stim_sync_in,
  // Avalon-MM slave port towards the PCIe-to-Avalon bridge
  input  logic [neuro_pkg::AV_ADDR_W-1:0]  avs_address,
  input  logic                             avs_read,
  input  logic                             avs_write,
  input  logic [neuro_pkg::AV_DATA_W-1:0]  avs_writedata,
  output logic [neuro_pkg::AV_DATA_W-1:0]  avs_readdata,
  output logic                             avs_readdatavalid,
  output logic                             irq,
  // board outputs
  output logic [neuro_pkg::STIM_W-1:0]     stim_out,
  output logic [3:0]                       ledr
);
  import neuro_pkg::*;

  localparam int unsigned LEVEL_W = $clog2(EV_DEPTH + 2);

  logic [N_CH-1:0]   ch_level, ch_rise;
  logic              sync_level, sync_rise;
  logic              acq_en, running;
  logic              cnt_clr, cnt_inc;
  logic [TS_W-1:0]   timestamp;
  logic [FLAG_W-1:0] flags;
  logic              ev_wr, stim_deq, stim_req;
  event_t            ev_word_in, ev_word_out;
  logic              ev_word_valid;
  logic              ev_rd, ev_not_empty, ev_full, ev_ovf, ev_unf;
  logic [LEVEL_W-1:0] ev_level;
  logic              stim_enq, stim_empty, stim_full, stim_ovf, stim_unf;
  logic [STIM_W-1:0] stim_din;
  logic              wdog_clr;
  logic [1:0]        ev_led, stim_led;
  logic [15:0]       ev_wcnt, stim_wcnt;

  digital_in_sync #(.N_IN(N_CH)) u_spike_sync (
    .clk, .rst_n, .pin(spike_in), .level(ch_level), .rise(ch_rise));

  digital_in_sync #(.N_IN(1)) u_stim_sync (
    .clk, .rst_n, .pin(stim_sync_in), .level(sync_level), .rise(sync_rise));

  sync_logic_control #(.N_CH(N_CH), .CLK_PER_US(CLK_PER_US)) u_ctrl (
    .clk, .rst_n, .acq_en, .ch_rise, .sync_rise, .running,
    .cnt_clr, .cnt_inc, .flags, .ev_wr, .stim_deq, .stim_req);

  clock_counter #(.WIDTH(TS_W)) u_counter (
    .clk, .rst_n, .clr(cnt_clr), .inc(cnt_inc), .count(timestamp));

  event_packer u_packer (
    .clk, .rst_n, .wr(ev_wr), .flags, .timestamp,
    .word(ev_word_in), .word_valid(ev_word_valid));

  bram_fifo #(.WIDTH(EVENT_W), .DEPTH(EV_DEPTH)) u_ev_fifo (
    .clk, .rst_n, .wr_en(ev_word_valid), .din(ev_word_in), .rd_en(ev_rd),
    .dout(ev_word_out), .not_empty(ev_not_empty), .full(ev_full), .level(ev_level),
    .overflow(ev_ovf), .underrun(ev_unf));

  stim_fifo #(.WIDTH(STIM_W), .DEPTH(STIM_DEPTH)) u_stim_fifo (
    .clk, .rst_n, .enq(stim_enq), .din(stim_din), .deq(stim_deq),
    .stim_out, .empty(stim_empty), .full(stim_full),
    .overflow(stim_ovf), .underrun(stim_unf));

  buffer_watchdog #(.CNT_W(16)) u_ev_wdog (
    .clk, .rst_n, .overflow(ev_ovf), .underrun(ev_unf), .clr(wdog_clr),
    .led(ev_led), .err_count(ev_wcnt));

  buffer_watchdog #(.CNT_W(16)) u_stim_wdog (
    .clk, .rst_n, .overflow(stim_ovf), .underrun(stim_unf), .clr(wdog_clr),
    .led(stim_led), .err_count(stim_wcnt));

  host_regs #(.LEVEL_W(LEVEL_W)) u_regs (
    .clk, .rst_n, .avs_address, .avs_read, .avs_write, .avs_writedata,
    .avs_readdata, .avs_readdatavalid, .irq,
    .acq_en, .running,
    .ev_word(ev_word_out), .ev_not_empty, .ev_level, .ev_rd,
    .stim_enq, .stim_din, .stim_full, .stim_empty, .stim_req,
    .ev_wdog_led(ev_led), .stim_wdog_led(stim_led),
    .ev_wdog_count(ev_wcnt), .stim_wdog_count(stim_wcnt), .wdog_clr);

  assign ledr = {stim_led, ev_led};

endmodule
