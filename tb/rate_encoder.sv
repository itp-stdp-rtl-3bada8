// rate_encoder -- Bernoulli rate coding of normalised inputs into spikes.
//
// A stimulus model for testbenches. It is not part of the engine: it turns
// input intensities into spike trains the way data is prepared for a spiking
// network, so that spike statistics can be studied in simulation.
//
// Each channel holds an intensity x in [0, 1) as an X_W-bit fraction
// (x / 2^X_W). On every step pulse a fresh uniform number r in [0, 1) is
// drawn per channel, and the channel spikes when r < x, so the spike
// probability per step is x. r is the top X_W bits of a per-channel 16-bit
// maximal-length Galois LFSR (polynomial x^16 + x^14 + x^13 + x^11 + 1). Each
// channel starts from its own seed, so the channels are not in lock step.
// The LFSR is advanced by X_W bits per step, so consecutive draws share no
// bits (a one-bit advance would make r(t+1) roughly r(t)/2 and correlate
// neighbouring steps).
// The spike vector is registered and holds until the next step pulse.
module rate_encoder #(
  parameter int N_CH = 4,
  parameter int X_W  = 8,
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      step,
  input  logic [N_CH-1:0][X_W-1:0]  x,
  output logic [N_CH-1:0]           spikes
);
  localparam logic [15:0] TAPS = 16'hB400;

  logic [N_CH-1:0][15:0] lfsr;

  function automatic logic [15:0] seed_of(input int ch);
    logic [15:0] s;
    s = SEED ^ 16'(ch * 16'h9E37);
    return (s == 16'h0) ? 16'h1 : s;
  endfunction

  function automatic logic [15:0] advance(input logic [15:0] s);
    logic [15:0] v;
    v = s;
    for (int i = 0; i < X_W; i++) v = v[0] ? ((v >> 1) ^ TAPS) : (v >> 1);
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) lfsr[c] <= seed_of(c);
      spikes <= '0;
    end else if (step) begin
      for (int c = 0; c < N_CH; c++) begin
        spikes[c] <= (lfsr[c][15 -: X_W] < x[c]);
        lfsr[c]   <= advance(lfsr[c]);
      end
    end
  end
endmodule
