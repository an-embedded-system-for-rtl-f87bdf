// digital_in_sync: the Digital IN synchronizer.
//
// The analog front-end emits one short digital pulse per detected spike,
// asynchronous to the FPGA clock. Each of the N_IN lines passes through a
// chain of SYNC_STAGES flip-flops (metastability guard), then one more
// register whose value is compared with the synchronized level to find the
// rising edge. `rise[i]` is high for exactly one clock cycle per pulse,
// SYNC_STAGES+1 cycles after the pin goes high; a pulse must stay high and
// then low for at least one clock period each to be seen. The paper names a
// synchronizer in front of the logic; the stage count and the rising-edge
// choice are this design's own.
module digital_in_sync #(
  parameter int unsigned N_IN        = 32,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_IN-1:0] pin,    // asynchronous pulses
  output logic [N_IN-1:0] level,  // synchronized level
  output logic [N_IN-1:0] rise    // one-cycle pulse per rising edge
);

  logic [N_IN-1:0] stage [SYNC_STAGES];
  logic [N_IN-1:0] last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(SYNC_STAGES); s++) stage[s] <= '0;
      last <= '0;
    end else begin
      stage[0] <= pin;
      for (int s = 1; s < int'(SYNC_STAGES); s++) stage[s] <= stage[s-1];
      last <= stage[SYNC_STAGES-1];
    end
  end

  assign level = stage[SYNC_STAGES-1];
  assign rise  = level & ~last;

endmodule
