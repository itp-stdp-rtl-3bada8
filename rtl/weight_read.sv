// weight_read -- turns one spike history into the magnitude of a weight
// change, the central trick of ITP-STDP.
//
// A history bit that lies k steps before the newest position carries the
// weight 2^-k, so the history read as a binary fraction with one integer
// bit (Q1.(D-1), MSB = newest step) is already the sum of base-2
// exponential STDP contributions of all earlier spikes. Hence:
//   all-to-all pairing : mag = hist            (no arithmetic at all)
//   nearest neighbour  : mag = MSB mask(hist)  (only the first 1 found
//                        from the newest end is kept, all other bits 0)
// Both readings and the MSB mask follow the paper. The pairing mode is a
// run-time input here; the engine is meant to run nearest neighbour.
// Purely combinational.
module weight_read
  import itp_pkg::*;
#(
  parameter int unsigned D = itp_pkg::HIST_DEPTH
) (
  input  pairing_e     pairing,
  input  logic [D-1:0] hist,
  output logic [D-1:0] mag
);
  logic [D-1:0] mask;
  logic         found;

  // MSB mask: priority detection from the newest (most significant) bit
  always_comb begin
    mask  = '0;
    found = 1'b0;
    for (int i = D - 1; i >= 0; i--) begin
      if (hist[i] && !found) begin
        mask[i] = 1'b1;
        found   = 1'b1;
      end
    end
  end

  assign mag = (pairing == PAIR_NEAREST) ? mask : hist;

endmodule
