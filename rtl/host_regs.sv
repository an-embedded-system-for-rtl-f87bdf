// host_regs: the memory-mapped register file seen by the host.
//
// An Avalon-MM slave with 32-bit data and word addresses, placed behind
// the PCIe-to-Avalon bridge. It has no wait states and a fixed read latency
// of one cycle: `readdata` and `readdatavalid` follow a `read` by one clock.
// Register map (neuro_pkg::reg_addr_e):
//   0 FLAGS   R  flags half of the oldest event word, 0 if none
//   1 TSTAMP  R  timestamp half of the oldest event word, 0 if none; the
//                read removes the word from the event FIFO
//   2 STATUS  R  [0] event waiting  [1] stimulus request  [2] stim FIFO full
//                [3] stim FIFO empty [4] acquisition running
//                [5] event overflow seen [6] event underrun seen
//                [7] stim overflow seen  [8] stim underrun seen
//   3 CONTROL RW [0] acquisition enable  [1] interrupt enable
//   4 STIM    W  [7:0] stimulus sample, enqueued in the stimulus FIFO
//   5 IRQACK  W  [0] clear the stimulus request  [1] clear both watchdogs
//   6 LEVEL   R  event FIFO fill level
//   7 WDOG    R  {stim watchdog count[15:0], event watchdog count[15:0]}
// The interrupt line `irq` is a level: high while interrupts are enabled
// and either an event word waits or a stimulus request is pending. The
// stimulus request is set by each stimulus-sync dequeue and stays set until
// acknowledged. The host's handler thus reads FLAGS then TSTAMP until the
// FIFO is empty, writes the next stimulus sample when STATUS[1] is set, and
// acknowledges - the order of the paper's driver flow. The paper gives the
// interrupt, the memory-mapped readout, the stimulus write and the
// acquisition start/stop command; the addresses, bit positions, the
// 32-bit split of the event word and the level-type interrupt are this
// design's choices.
module host_regs #(
  parameter int unsigned LEVEL_W = 11
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // Avalon-MM slave
  input  logic [neuro_pkg::AV_ADDR_W-1:0]  avs_address,
  input  logic                             avs_read,
  input  logic                             avs_write,
  input  logic [neuro_pkg::AV_DATA_W-1:0]  avs_writedata,
  output logic [neuro_pkg::AV_DATA_W-1:0]  avs_readdata,
  output logic                             avs_readdatavalid,
  output logic                             irq,
  // control
  output logic                             acq_en,
  input  logic                             running,
  // event FIFO read side
  input  neuro_pkg::event_t                ev_word,
  input  logic                             ev_not_empty,
  input  logic [LEVEL_W-1:0]               ev_level,
  output logic                             ev_rd,
  // stimulus FIFO write side
  output logic                             stim_enq,
  output logic [neuro_pkg::STIM_W-1:0]     stim_din,
  input  logic                             stim_full,
  input  logic                             stim_empty,
  input  logic                             stim_req,    // pulse per dequeue
  // watchdogs
  input  logic [1:0]                       ev_wdog_led,
  input  logic [1:0]                       stim_wdog_led,
  input  logic [15:0]                      ev_wdog_count,
  input  logic [15:0]                      stim_wdog_count,
  output logic                             wdog_clr
);
  import neuro_pkg::*;

  logic           irq_en;
  logic           req_pending;
  logic [31:0]    rdata;
  reg_addr_e      addr;

  assign addr = reg_addr_e'(avs_address);

  // Write side.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acq_en      <= 1'b0;
      irq_en      <= 1'b0;
      req_pending <= 1'b0;
    end else begin
      if (avs_write && addr == REG_CONTROL) begin
        acq_en <= avs_writedata[0];
        irq_en <= avs_writedata[1];
      end
      // A new request wins over an acknowledge in the same cycle.
      if (stim_req)
        req_pending <= 1'b1;
      else if (avs_write && addr == REG_IRQACK && avs_writedata[0])
        req_pending <= 1'b0;
    end
  end

  assign stim_enq = avs_write && (addr == REG_STIM);
  assign stim_din = avs_writedata[STIM_W-1:0];
  assign wdog_clr = avs_write && (addr == REG_IRQACK) && avs_writedata[1];
  assign ev_rd    = avs_read && (addr == REG_TSTAMP);

  // Read side.
  always_comb begin
    rdata = '0;
    unique case (addr)
      REG_FLAGS:   rdata = ev_not_empty ? ev_word.flags : '0;
      REG_TSTAMP:  rdata = ev_not_empty ? ev_word.timestamp : '0;
      REG_STATUS:  rdata = 32'({stim_wdog_led, ev_wdog_led, running, stim_empty,
                                stim_full, req_pending, ev_not_empty});
      REG_CONTROL: rdata = 32'({irq_en, acq_en});
      REG_STIM:    rdata = '0;
      REG_IRQACK:  rdata = '0;
      REG_LEVEL:   rdata = 32'(ev_level);
      REG_WDOG:    rdata = {stim_wdog_count, ev_wdog_count};
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      avs_readdata      <= '0;
      avs_readdatavalid <= 1'b0;
    end else begin
      avs_readdatavalid <= avs_read;
      if (avs_read) avs_readdata <= rdata;
    end
  end

  assign irq = irq_en && (ev_not_empty || req_pending);

  // Bus rule: a slave with no wait states sees a read or a write, not both.
  a_rd_wr_excl: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(avs_read && avs_write))
    else $error("host_regs: read and write in the same cycle");

endmodule
