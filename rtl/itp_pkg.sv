// itp_pkg -- shared sizes, formats and configuration types of the ITP-STDP
// learning engine.
//
// The engine is a prototype of four input-layer ("pre") neurons fully
// connected to four output-layer ("post") neurons, 16 synapses in all. Spike
// histories are 7 bits deep; a weight change is 8 bits, a sign bit plus the
// 7 history bits read as a binary fraction with one integer bit (Q1.6).
// Weights are 8-bit signed numbers with the same LSB (2^-6). Those numbers
// follow the paper; the 10-bit input-current width and the run-time
// configuration record are this design's own choices.
package itp_pkg;

  localparam int unsigned N_PRE      = 4;   // input-layer neurons
  localparam int unsigned N_POST     = 4;   // output-layer neurons
  localparam int unsigned N_NEURON   = N_PRE + N_POST;
  localparam int unsigned HIST_DEPTH = 7;   // spike-history depth (ISI analysis)
  localparam int unsigned W_WIDTH    = 8;   // signed weight and weight change
  localparam int unsigned V_WIDTH    = 8;   // membrane potential
  localparam int unsigned I_WIDTH    = 10;  // signed input current
  localparam int unsigned NIDX_W     = $clog2(N_NEURON);

  // Spike-pairing scheme used by the weight read.
  typedef enum logic {
    PAIR_ALL_TO_ALL = 1'b0,  // history read as a whole binary fraction
    PAIR_NEAREST    = 1'b1   // only the most recent earlier spike counts
  } pairing_e;

  // Run-time learning configuration, shared by every synapse.
  typedef struct packed {
    logic     learn_en;  // 0: weights are frozen
    pairing_e pairing;
    logic [2:0] lr_shift; // learning rate 2^-lr_shift
    logic     comp_en;   // multiply the change by ~ln 2 (0.6875)
  } stdp_cfg_t;

endpackage
