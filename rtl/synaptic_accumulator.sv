// synaptic_accumulator -- forms the input current of every post-synaptic
// neuron from the weights of the pre-synaptic neurons that just spiked.
//
//   current[j] = sum over i of ( pre_spikes[i] ? weights[i][j] : 0 )
// Each weight is gated by its pre neuron's spike and the gated weights go
// through an adder tree, one tree per post neuron, as in the paper. The sum
// is sign-extended to I_W bits (this design's width; 4 x 8-bit signed
// weights need 10 bits, so it cannot overflow).
//
// Timing: start samples pre_spikes/weights; current and done are registered
// one clock later and current holds until the next start.
module synaptic_accumulator #(
  parameter int unsigned N_PRE  = itp_pkg::N_PRE,
  parameter int unsigned N_POST = itp_pkg::N_POST,
  parameter int unsigned W_W    = itp_pkg::W_WIDTH,
  parameter int unsigned I_W    = itp_pkg::I_WIDTH
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  start,
  input  logic [N_PRE-1:0]                      pre_spikes,
  input  logic [N_PRE-1:0][N_POST-1:0][W_W-1:0] weights,
  output logic [N_POST-1:0][I_W-1:0]            current,
  output logic                                  done
);
  // Pairwise adder tree over a power-of-two number of leaves.
  localparam int unsigned LEAVES = 1 << $clog2(N_PRE);

  logic signed [I_W-1:0] tree [N_POST][2*LEAVES-1];
  always_comb begin
    for (int j = 0; j < N_POST; j++) begin
      for (int l = 0; l < LEAVES; l++)
        tree[j][LEAVES-1+l] = (l < N_PRE && pre_spikes[l % N_PRE])
                              ? I_W'($signed(weights[l % N_PRE][j])) : '0;
      for (int n = LEAVES - 2; n >= 0; n--)
        tree[j][n] = tree[j][2*n+1] + tree[j][2*n+2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      current <= '0;
      done    <= 1'b0;
    end else begin
      done <= start;
      if (start)
        for (int j = 0; j < N_POST; j++) current[j] <= tree[j][0];
    end
  end
endmodule
