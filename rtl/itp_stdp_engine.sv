// itp_stdp_engine -- ITP-STDP on-chip learning engine: four input-layer LIF
// neurons fully connected to four output-layer LIF neurons through 16
// synapses that learn with intrinsic-timing power-of-two STDP.
//
// Data flow of one time step (started by step_start):
//   1. the step controller issues neurons 0..7 to the single pipelined LIF
//      unit, one per clock; neurons 0..3 take ext_current[0..3] (latched
//      at step_start), neurons 4..7 take the currents accumulated at the
//      end of the previous step;
//   2. the spikes come back one per clock, 8 clocks after issue, into the
//      neuron spike array (gated by enable);
//   3. the spike histories shift the complete step in;
//   4. all 16 synapses update in parallel (2-stage pipeline);
//   5. the accumulator adds, per output neuron, the new weights of the input
//      neurons that spiked in this step; that is the next step's current.
// step_done pulses when the step is complete (23 clocks after step_start
// with the default sizes); spikes, weights and dws then hold its results.
// w_load writes one weight (index pre*4+post) while the engine is idle.
//
// The structure and the order of operations follow the paper. The
// source of the input-layer currents, the step handshake and the load port
// are this design's own.
module itp_stdp_engine
  import itp_pkg::*;
#(
  parameter int unsigned E_TAU  = 199,   // round(256 * exp(-1/4))
  parameter int unsigned E_REST = 0,
  parameter int unsigned V_TH   = 128
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       step_start,
  input  logic [N_PRE-1:0][I_WIDTH-1:0]              ext_current,
  input  stdp_cfg_t                                  cfg,
  input  logic [N_NEURON-1:0]                        enable,
  input  logic                                       w_load,
  input  logic [$clog2(N_PRE*N_POST)-1:0]            w_load_idx,
  input  logic [W_WIDTH-1:0]                         w_load_val,
  output logic                                       busy,
  output logic                                       step_done,
  output logic [N_NEURON-1:0]                        spikes,
  output logic [N_PRE-1:0][N_POST-1:0][W_WIDTH-1:0]  weights,
  output logic [N_PRE-1:0][N_POST-1:0][W_WIDTH-1:0]  dws,
  output logic [N_POST-1:0][I_WIDTH-1:0]             post_current
);
  // ---- control ----
  logic              issue_valid, hist_shift, stdp_upd, acc_start;
  logic [NIDX_W-1:0] issue_idx;
  logic              spikes_done, upd_done, acc_done;

  step_controller #(.N_NEURON(N_NEURON)) u_ctrl (
    .clk, .rst_n, .start(step_start), .spikes_done, .upd_done, .acc_done,
    .issue_valid, .issue_idx, .hist_shift, .stdp_upd, .acc_start,
    .busy, .step_done
  );

  logic [N_PRE-1:0][I_WIDTH-1:0] ext_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  ext_q <= '0;
    else if (step_start && !busy) ext_q <= ext_current;
  end

  // ---- neuron unit ----
  logic signed [I_WIDTH-1:0] issue_current;
  always_comb begin
    if (int'(issue_idx) < N_PRE) issue_current = ext_q[issue_idx[$clog2(N_PRE)-1:0]];
    else                         issue_current = post_current[issue_idx[$clog2(N_POST)-1:0]];
  end

  logic              n_valid, n_spike;
  logic [NIDX_W-1:0] n_idx;
  logic [V_WIDTH-1:0] n_v;
  lif_neuron_unit #(.E_TAU(E_TAU), .E_REST(E_REST), .V_TH(V_TH)) u_lif (
    .clk, .rst_n, .in_valid(issue_valid), .in_idx(issue_idx),
    .in_current(issue_current),
    .out_valid(n_valid), .out_idx(n_idx), .out_spike(n_spike), .out_v(n_v)
  );

  // ---- spikes and histories ----
  neuron_spike_array #(.N_NEURON(N_NEURON)) u_spk (
    .clk, .rst_n, .in_valid(n_valid), .in_idx(n_idx), .in_spike(n_spike),
    .enable, .spikes, .step_done(spikes_done)
  );

  logic [N_NEURON-1:0][HIST_DEPTH-1:0] hist;
  spike_history #(.N_NEURON(N_NEURON), .D(HIST_DEPTH)) u_hist (
    .clk, .rst_n, .shift(hist_shift), .spikes, .hist
  );

  // ---- synapses and weights ----
  stdp_crossbar #(.N_PRE(N_PRE), .N_POST(N_POST), .D(HIST_DEPTH), .W_W(W_WIDTH)) u_xbar (
    .clk, .rst_n, .cfg, .upd(stdp_upd), .hist,
    .w_load(w_load && !busy), .w_load_idx, .w_load_val,
    .weights, .dws, .upd_done
  );

  // ---- input currents of the output layer ----
  synaptic_accumulator #(.N_PRE(N_PRE), .N_POST(N_POST), .W_W(W_WIDTH), .I_W(I_WIDTH)) u_acc (
    .clk, .rst_n, .start(acc_start), .pre_spikes(spikes[N_PRE-1:0]), .weights,
    .current(post_current), .done(acc_done)
  );

  logic [V_WIDTH-1:0] unused_v;
  assign unused_v = n_v;

endmodule
