// itp_stdp_synapse -- one plastic synapse of the ITP-STDP engine: update
// control, weight read, scaling and the weight register.
//
// The newest bits of the pre- and post-synaptic histories are the trigger
// bits. When both or neither neuron fired in the newest step nothing
// changes. When only the post neuron fired the synapse is potentiated (LTP)
// by the pre history read as a fraction; when only the pre neuron fired it
// is depressed (LTD) by the post history. (XOR of the trigger bits, ANDed
// with each, drives a three-way MUX LTP / LTD / 0.) The signed change is
// then scaled with shifts only: right by cfg.lr_shift (learning rate), and,
// if cfg.comp_en, by ~ln 2 = 2^-1 + 2^-3 + 2^-4 (0.6875) to compensate the
// base-2 time constant. The result is added to the weight, which saturates
// at the 8-bit signed range.
//
// Follows the paper: trigger rule, LTP/LTD sources, MUX with 0, shift-based
// scaling, one adder and an 8-bit signed weight register, two pipeline
// stages. This design's own choices: the shift amounts, the ln 2 shift-add
// approximation, saturation, the load port and W_INIT.
//
// Timing: upd (one clock, histories valid) -> stage 1 registers the
// selected signed change -> stage 2 writes the weight; upd_done pulses in
// the clock the new weight is visible, 2 clocks after upd. w_load writes
// w_load_val directly and has priority over an update in stage 2.
module itp_stdp_synapse
  import itp_pkg::*;
#(
  parameter int unsigned D      = itp_pkg::HIST_DEPTH,
  parameter int unsigned W_W    = itp_pkg::W_WIDTH,
  parameter int          W_INIT = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  stdp_cfg_t             cfg,
  input  logic                  upd,
  input  logic [D-1:0]          pre_hist,
  input  logic [D-1:0]          post_hist,
  input  logic                  w_load,
  input  logic signed [W_W-1:0] w_load_val,
  output logic signed [W_W-1:0] weight,
  output logic signed [W_W-1:0] dw,
  output logic                  upd_done
);
  // ---- update control (trigger bits) ----
  logic one_fired, ltp, ltd;
  always_comb begin
    one_fired = pre_hist[D-1] ^ post_hist[D-1];
    ltp       = one_fired & post_hist[D-1];
    ltd       = one_fired & pre_hist[D-1];
  end

  // ---- weight read of both histories ----
  logic [D-1:0] ltp_mag, ltd_mag;
  weight_read #(.D(D)) u_rd_pre  (.pairing(cfg.pairing), .hist(pre_hist),  .mag(ltp_mag));
  weight_read #(.D(D)) u_rd_post (.pairing(cfg.pairing), .hist(post_hist), .mag(ltd_mag));

  // ---- stage 1: three-way MUX into two's complement ----
  logic signed [W_W-1:0] sel, dw1;
  logic                  v1;
  always_comb begin
    if (ltp)      sel =  $signed(W_W'(ltp_mag));
    else if (ltd) sel = -$signed(W_W'(ltd_mag));
    else          sel = '0;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dw1 <= '0;
      v1  <= 1'b0;
    end else begin
      v1 <= upd;
      if (upd) dw1 <= cfg.learn_en ? sel : '0;
    end
  end

  // ---- stage 2: shift-based scaling and compensation, accumulate ----
  logic signed [W_W-1:0] scaled, comp;
  logic signed [W_W+1:0] sum;
  always_comb begin
    scaled = dw1 >>> cfg.lr_shift;
    comp   = (scaled >>> 1) + (scaled >>> 3) + (scaled >>> 4);
    if (cfg.comp_en) scaled = comp;
    sum = (W_W+2)'(weight) + (W_W+2)'(scaled);
  end

  localparam logic signed [W_W+1:0] WMAX = (W_W+2)'((1 <<< (W_W-1)) - 1);
  localparam logic signed [W_W+1:0] WMIN = -(W_W+2)'(1 <<< (W_W-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      weight   <= W_W'(W_INIT);
      dw       <= '0;
      upd_done <= 1'b0;
    end else begin
      upd_done <= v1;
      if (w_load) weight <= w_load_val;
      else if (v1) begin
        if (sum > WMAX)      weight <= WMAX[W_W-1:0];
        else if (sum < WMIN) weight <= WMIN[W_W-1:0];
        else                 weight <= sum[W_W-1:0];
        dw <= scaled;
      end
    end
  end

endmodule
