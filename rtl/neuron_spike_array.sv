// neuron_spike_array -- spike buffer between the time-multiplexed neuron
// and the spike histories.
//
// The shared neuron unit delivers one neuron's result per clock. This block
// keeps one 1/0 register per neuron and writes the arriving spike into the
// register of its index, gated by that neuron's enable (a disabled neuron
// records 0, as the enable/0 multiplexers of the paper's spike buffer do).
// When the spike of the last neuron (index N_NEURON-1) is written, step_done
// pulses for one clock: the neurons are issued in index order, so the
// vector then holds a complete time step. Collecting sequential spikes into
// per-neuron registers follows the paper; the completion rule is this
// design's choice.
//
// Timing: spikes and step_done are registered, one clock after in_valid.
module neuron_spike_array #(
  parameter int unsigned N_NEURON = itp_pkg::N_NEURON
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [$clog2(N_NEURON)-1:0] in_idx,
  input  logic                        in_spike,
  input  logic [N_NEURON-1:0]         enable,
  output logic [N_NEURON-1:0]         spikes,
  output logic                        step_done
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spikes    <= '0;
      step_done <= 1'b0;
    end else begin
      step_done <= in_valid && (int'(in_idx) == N_NEURON - 1);
      if (in_valid) spikes[in_idx] <= in_spike & enable[in_idx];
    end
  end
endmodule
