// step_controller -- sequences one time step of the learning engine.
//
// A step runs in the order the paper gives: all neurons are updated and
// spike, the spikes enter the histories, the synapses update their weights,
// and only then are the new weights accumulated into the input currents
// of the next step. States:
//   IDLE     wait for start
//   ISSUE    issue neurons 0 .. N_NEURON-1 to the neuron unit, one per clock
//   WAIT_SPK wait until the spike buffer holds the whole step (spikes_done)
//   SHIFT    one-clock pulse: shift the spike histories
//   STDP     one-clock pulse: start the synapse update
//   WAIT_UPD wait for upd_done (2 clocks later)
//   ACC      one-clock pulse: start the accumulator
//   WAIT_ACC wait for acc_done; step_done pulses in that clock
// The sequence follows the paper; the state machine, handshakes and
// one-clock pulses are this design's own. busy is high outside IDLE;
// start is ignored while busy. Two assertions check that spikes_done and
// acc_done come only while they are awaited. They are disabled during reset
// by sampling rst_n at the clock. Lint therefore reports rst_n as used both
// synchronously and asynchronously; the flops themselves reset
// asynchronously only.
module step_controller #(
  parameter int unsigned N_NEURON = itp_pkg::N_NEURON
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic                        spikes_done,
  input  logic                        upd_done,
  input  logic                        acc_done,
  output logic                        issue_valid,
  output logic [$clog2(N_NEURON)-1:0] issue_idx,
  output logic                        hist_shift,
  output logic                        stdp_upd,
  output logic                        acc_start,
  output logic                        busy,
  output logic                        step_done
);
  typedef enum logic [2:0] {
    IDLE, ISSUE, WAIT_SPK, SHIFT, STDP, WAIT_UPD, ACC, WAIT_ACC
  } state_e;

  state_e                        state, nxt;
  logic [$clog2(N_NEURON)-1:0]   cnt;

  always_comb begin
    nxt = state;
    unique case (state)
      IDLE:     if (start) nxt = ISSUE;
      ISSUE:    if (int'(cnt) == N_NEURON - 1) nxt = WAIT_SPK;
      WAIT_SPK: if (spikes_done) nxt = SHIFT;
      SHIFT:    nxt = STDP;
      STDP:     nxt = WAIT_UPD;
      WAIT_UPD: if (upd_done) nxt = ACC;
      ACC:      nxt = WAIT_ACC;
      WAIT_ACC: if (acc_done) nxt = IDLE;
      default:  nxt = IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      cnt   <= '0;
    end else begin
      state <= nxt;
      if (state == ISSUE) cnt <= cnt + 1'b1;
      else                cnt <= '0;
    end
  end

  assign issue_valid = (state == ISSUE);
  assign issue_idx   = cnt;
  assign hist_shift  = (state == SHIFT);
  assign stdp_upd    = (state == STDP);
  assign acc_start   = (state == ACC);
  assign busy        = (state != IDLE);
  assign step_done   = (state == WAIT_ACC) && acc_done;

  // The done inputs only arrive in their wait states.
  a_spk_in_wait: assert property (@(posedge clk) disable iff (!rst_n)
                                  spikes_done |-> state == WAIT_SPK);
  a_acc_in_wait: assert property (@(posedge clk) disable iff (!rst_n)
                                  acc_done |-> state == WAIT_ACC);

endmodule
