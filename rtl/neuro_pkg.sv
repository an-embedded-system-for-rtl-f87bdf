// neuro_pkg: widths and types shared by the spike timestamp detector.
//
// The detector tags digital spike pulses with a 32-bit timestamp that
// advances every microsecond and pairs it with a 32-bit field of channel
// flags, giving the 64-bit event word stored in the block-RAM FIFO. The
// stimulus path carries 8-bit samples. These four widths follow the paper's
// block diagram. The order of the two halves inside the event word, the
// clock frequency and the register map below are this design's choices.
package neuro_pkg;

  localparam int unsigned TS_W    = 32;  // timestamp counter width
  localparam int unsigned FLAG_W  = 32;  // channel flag field width
  localparam int unsigned EVENT_W = FLAG_W + TS_W;  // 64-bit FIFO word
  localparam int unsigned STIM_W  = 8;   // stimulus sample width

  // Board clock in MHz: cycles per 1 us timestamp step (50 MHz oscillator).
  localparam int unsigned CLK_PER_US_DEFAULT = 50;

  // One event word: which channels fired during one microsecond and when.
  typedef struct packed {
    logic [FLAG_W-1:0] flags;      // bit i set: channel i fired
    logic [TS_W-1:0]   timestamp;  // microseconds since acquisition start
  } event_t;

  // Host register map, 32-bit Avalon-MM word addresses.
  localparam int unsigned AV_ADDR_W = 3;
  localparam int unsigned AV_DATA_W = 32;
  typedef enum logic [AV_ADDR_W-1:0] {
    REG_FLAGS   = 3'd0,  // R : flags of the oldest event (no side effect)
    REG_TSTAMP  = 3'd1,  // R : timestamp of the oldest event, pops it
    REG_STATUS  = 3'd2,  // R : status bits, see host_regs
    REG_CONTROL = 3'd3,  // RW: bit0 acquisition enable, bit1 IRQ enable
    REG_STIM    = 3'd4,  // W : enqueue one stimulus sample (bits 7:0)
    REG_IRQACK  = 3'd5,  // W : bit0 clears the stimulus request, bit1 the watchdogs
    REG_LEVEL   = 3'd6,  // R : event FIFO fill level
    REG_WDOG    = 3'd7   // R : watchdog event counters {stim[15:0], event[15:0]}
  } reg_addr_e;

endpackage
