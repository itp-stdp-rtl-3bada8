// spike_history -- the spike-history shift-register array: one D-bit shift
// register per neuron.
//
// On each shift (one per time step) every neuron's new spike enters at the
// MSB and the older spikes move one place toward the LSB; the oldest is
// dropped. The MSB is therefore the trigger bit of the newest step, and a
// bit k places below it lies k steps in the past, which gives it the
// weight 2^-k when the register is read as a fraction. Depth 7 (covering
// 99.5 % of the inter-spike intervals in the paper's analysis) follows
// the paper; reset to all zeros is this design's choice.
//
// Timing: hist reflects spikes one clock after shift.
module spike_history #(
  parameter int unsigned N_NEURON = itp_pkg::N_NEURON,
  parameter int unsigned D        = itp_pkg::HIST_DEPTH
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           shift,
  input  logic [N_NEURON-1:0]            spikes,
  output logic [N_NEURON-1:0][D-1:0]     hist
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hist <= '0;
    else if (shift)
      for (int n = 0; n < N_NEURON; n++)
        hist[n] <= {spikes[n], hist[n][D-1:1]};
  end
endmodule
