// spike_buffer: one bit per output neuron of the macro (N_NEURONS = 12).
//
// SpikeCheck in an odd cycle decides the neurons of the odd adders (0, 2, .., 10), in an even
// cycle those of the even adders (1, 3, .., 11); each adder's MSB column delivers one decision.
// The bits of the other parity are kept. The stored bits gate the conditional writes of
// ResetV and of the conditional AccV2V, and are the macro's output spikes for the timestep.
// Timing: loaded at the rising clock edge of a SpikeCheck cycle; cleared by reset.
// That the buffer holds one bit per neuron and is set from the MSB column is the paper's
// (Figs. 4, 5); the reset and the per-parity update are this design's choices.
module spike_buffer
  import impulse_pkg::*;
#(
  parameter int unsigned N_ADD = impulse_pkg::N_ADDERS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               upd,        // SpikeCheck this cycle
  input  logic               par_even,
  input  logic [N_ADD-1:0]   spike_new,  // decision of each adder of this parity
  output logic [2*N_ADD-1:0] spike
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spike <= '0;
    end else if (upd) begin
      for (int unsigned g = 0; g < N_ADD; g++) spike[2*g + (par_even ? 1 : 0)] <= spike_new[g];
    end
  end

endmodule
