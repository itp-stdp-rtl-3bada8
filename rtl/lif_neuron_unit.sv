// lif_neuron_unit -- one pipelined leaky integrate-and-fire neuron shared by
// N_NEURON neuron states (time multiplexing).
//
// For the neuron issued in a cycle it computes
//   V' = (E_TAU * (V - E_REST)) / 256 + E_REST + I
//   spike = V' > V_TH ;  V <= spike ? E_REST : V'
// which is the discrete LIF update with the decay factor e^(-1/tau) given as
// the constant E_TAU in Q0.8. The multiplication is the approximate LLSMu
// multiplier. V is an unsigned V_WIDTH-bit value clamped to its range;
// V - E_REST is multiplied as sign and magnitude. The formula, the
// multiplier, the threshold-and-reset MUX and the eight pipeline stages
// follow the paper; the formats, the clamping and the default constants
// are this design's choices.
//
// Interface: in_valid / in_idx / in_current issue one neuron per clock.
// out_valid / out_idx / out_spike / out_v come out exactly STAGES = 8
// clocks later, one neuron per clock. The membrane state of a neuron is
// written in the last stage and read in the first, so the same neuron may
// be issued again 8 clocks after its previous issue (one time step of 8
// neurons back to back). States reset to E_REST.
//
// Stages: 1 read V, difference and E_REST+I; 2 MSB alignment and split;
// 3 llmu log;
// 4 llmu antilog; 5 compose; 6 scale and add; 7 clamp and compare;
// 8 reset MUX, state write and output.
module lif_neuron_unit #(
  parameter int unsigned N_NEURON = itp_pkg::N_NEURON,
  parameter int unsigned V_W      = itp_pkg::V_WIDTH,
  parameter int unsigned I_W      = itp_pkg::I_WIDTH,
  parameter int unsigned E_TAU    = 199,  // round(256 * exp(-1/4))
  parameter int unsigned E_REST   = 0,
  parameter int unsigned V_TH     = 128
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [$clog2(N_NEURON)-1:0] in_idx,
  input  logic signed [I_W-1:0]       in_current,
  output logic                        out_valid,
  output logic [$clog2(N_NEURON)-1:0] out_idx,
  output logic                        out_spike,
  output logic [V_W-1:0]              out_v
);
  localparam int unsigned XW = $clog2(N_NEURON);
  localparam int unsigned SW = (I_W > V_W ? I_W : V_W) + 3; // signed sum width
  localparam int unsigned STAGES = 8;

  logic [V_W-1:0] v_mem [N_NEURON];

  // ---- stage 1 ----
  logic signed [V_W:0] diff;
  always_comb diff = $signed({1'b0, v_mem[in_idx]}) - $signed((V_W+1)'(E_REST));

  logic                  neg1;
  logic [V_W-1:0]        mag1;
  logic signed [SW-1:0]  eri1;   // E_REST + I
  always_ff @(posedge clk) begin
    neg1 <= diff[V_W];
    mag1 <= diff[V_W] ? V_W'(-diff) : V_W'(diff);
    eri1 <= $signed(SW'(E_REST)) + SW'(in_current);
  end

  // ---- stages 2-5: LLSMu (4 clocks) ----
  logic [2*V_W-1:0] prod5;
  logic             pv5;
  llsmu #(.N(V_W/2)) u_mul (
    .clk, .rst_n, .in_valid(1'b1), .a(V_W'(E_TAU)), .b(mag1),
    .out_valid(pv5), .p(prod5)
  );

  // side-band delay line for index, sign and E_REST+I over the multiplier
  logic [XW-1:0]        idx_d [1:STAGES];
  logic                 vld_d [1:STAGES];
  logic                 neg_d [2:5];
  logic signed [SW-1:0] eri_d [2:5];
  always_ff @(posedge clk) begin
    idx_d[1] <= in_idx;
    for (int s = 2; s <= STAGES; s++) idx_d[s] <= idx_d[s-1];
    neg_d[2] <= neg1;
    eri_d[2] <= eri1;
    for (int s = 3; s <= 5; s++) begin
      neg_d[s] <= neg_d[s-1];
      eri_d[s] <= eri_d[s-1];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int s = 1; s <= STAGES; s++) vld_d[s] <= 1'b0;
    else begin
      vld_d[1] <= in_valid;
      for (int s = 2; s <= STAGES; s++) vld_d[s] <= vld_d[s-1];
    end
  end

  // ---- stage 6: scale by 2^-8 and add E_REST + I ----
  logic signed [SW-1:0] decay5, sum6;
  always_comb begin
    decay5 = $signed(SW'(prod5 >> 8));
    if (neg_d[5]) decay5 = -decay5;
  end
  always_ff @(posedge clk) sum6 <= eri_d[5] + decay5;

  // ---- stage 7: clamp and threshold compare ----
  logic [V_W-1:0] vc7;
  logic           fire7;
  always_ff @(posedge clk) begin
    if (sum6 < 0)                          vc7 <= '0;
    else if (sum6 > $signed(SW'({V_W{1'b1}}))) vc7 <= '1;
    else                                   vc7 <= V_W'(sum6);
    fire7 <= sum6 > $signed(SW'(V_TH));
  end

  // ---- stage 8: reset MUX, state write, output ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N_NEURON; n++) v_mem[n] <= V_W'(E_REST);
      out_spike <= 1'b0;
      out_v     <= '0;
    end else if (vld_d[7]) begin
      v_mem[idx_d[7]] <= fire7 ? V_W'(E_REST) : vc7;
      out_spike       <= fire7;
      out_v           <= fire7 ? V_W'(E_REST) : vc7;
    end
  end
  assign out_valid = vld_d[8];
  assign out_idx   = idx_d[8];

  // the multiplier's own valid is implied by the delay line
  logic unused_pv;
  assign unused_pv = pv5;

endmodule
