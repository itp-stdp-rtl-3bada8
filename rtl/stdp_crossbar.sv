// stdp_crossbar -- the synapse array: one ITP-STDP synapse for every
// connected (pre, post) pair, and with it the weight array.
//
// Neurons 0..N_PRE-1 are the pre-synaptic layer, neurons N_PRE..N_PRE+
// N_POST-1 the post-synaptic layer. Synapse (i, j) reads history i as its
// pre history and history N_PRE+j as its post history; connectivity is
// therefore nothing but which histories each synapse reads. CONN_MASK bit
// i*N_POST+j says whether pair (i, j) has a synapse (all ones: the paper's
// 4-to-4 fully connected prototype); an absent synapse reads weight 0.
// Weight index for w_load_idx is i*N_POST+j.
//
// Timing: as the synapse, upd_done 2 clocks after upd; all synapses update
// in parallel.
module stdp_crossbar #(
  parameter int unsigned N_PRE     = itp_pkg::N_PRE,
  parameter int unsigned N_POST    = itp_pkg::N_POST,
  parameter int unsigned D         = itp_pkg::HIST_DEPTH,
  parameter int unsigned W_W       = itp_pkg::W_WIDTH,
  parameter logic [N_PRE*N_POST-1:0] CONN_MASK = '1
) (
  input  logic                                        clk,
  input  logic                                        rst_n,
  input  itp_pkg::stdp_cfg_t                                   cfg,
  input  logic                                        upd,
  input  logic [N_PRE+N_POST-1:0][D-1:0]              hist,
  input  logic                                        w_load,
  input  logic [$clog2(N_PRE*N_POST)-1:0]             w_load_idx,
  input  logic [W_W-1:0]                              w_load_val,
  output logic [N_PRE-1:0][N_POST-1:0][W_W-1:0]       weights,
  output logic [N_PRE-1:0][N_POST-1:0][W_W-1:0]       dws,
  output logic                                        upd_done
);
  logic [N_PRE*N_POST-1:0] done;

  for (genvar i = 0; i < N_PRE; i++) begin : g_pre
    for (genvar j = 0; j < N_POST; j++) begin : g_post
      localparam int unsigned K = i * N_POST + j;
      if (CONN_MASK[K]) begin : g_syn
        logic signed [W_W-1:0] w, d;
        itp_stdp_synapse #(.D(D), .W_W(W_W)) u_syn (
          .clk, .rst_n, .cfg, .upd,
          .pre_hist (hist[i]),
          .post_hist(hist[N_PRE+j]),
          .w_load   (w_load && (int'(w_load_idx) == K)),
          .w_load_val(w_load_val),
          .weight(w), .dw(d), .upd_done(done[K])
        );
        assign weights[i][j] = w;
        assign dws[i][j]     = d;
      end else begin : g_none
        assign weights[i][j] = '0;
        assign dws[i][j]     = '0;
        assign done[K]       = 1'b0;
      end
    end
  end

  assign upd_done = |done;

endmodule
