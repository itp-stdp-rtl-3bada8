// tb_itp_stdp_engine -- end-to-end test of the learning engine at its
// default sizes (4 x 4 neurons, 16 synapses, 7-step histories). Runs
// 640 time steps with random input currents, learning settings and
// neuron enables, and after every step compares the spike vector, all 16
// weights and weight changes and the four output-layer currents with a
// cycle-free reference model of the whole engine (reference LIF with the
// reference approximate multiplier, shift-register histories, ITP-STDP
// update, accumulation). It also checks the step length and counts each
// mechanism of the design, failing if one never occurred: LTP, LTD, the
// both-fired and none-fired no-update cases, nearest-neighbour and
// all-to-all pairing, ln 2 compensation, learning switched off, weight
// saturation, neuron enable gating, weight loading, output-layer spikes.
// The last four blocks drive the input layer from a rate coder instead of
// random currents: an input neuron receives current 200 in the steps in which
// its channel spikes (intensities 230/256, 150/256, 80/256, 30/256), as when
// rate-coded data is presented to the network.
module tb_itp_stdp_engine;
  import itp_pkg::*;
  import tb_ref_pkg::*;
  localparam int ETAU = 199, EREST = 0, VTH = 128;
  // step length: start clock + 8 issue clocks + 8-stage neuron + spike
  // buffer + shift + update pulse + 2 update stages + accumulate pulse +
  // 1 accumulator stage = step_done 23 clocks after step_start
  localparam int STEP_CLOCKS = 1 + 8 + 8 + 1 + 1 + 1 + 2 + 1;

  logic clk = 0, rst_n = 0;
  logic step_start = 0, w_load = 0, busy, step_done;
  logic [3:0][9:0] ext_current = '0;
  stdp_cfg_t cfg;
  logic [7:0] enable = '1;
  logic [3:0] w_load_idx = 0;
  logic [7:0] w_load_val = 0;
  logic [7:0] spikes;
  logic [3:0][3:0][7:0] weights, dws;
  logic [3:0][9:0] post_current;
  logic enc_step = 0;
  logic [3:0] enc_spk;
  logic [3:0][7:0] enc_x = {8'd30, 8'd80, 8'd150, 8'd230};
  int n_rate_spk = 0;

  rate_encoder #(.N_CH(4), .X_W(8)) u_enc (.clk, .rst_n, .step(enc_step), .x(enc_x),
                                           .spikes(enc_spk));

  itp_stdp_engine dut (.clk, .rst_n, .step_start, .ext_current, .cfg, .enable,
    .w_load, .w_load_idx, .w_load_val, .busy, .step_done, .spikes, .weights,
    .dws, .post_current);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_ltp = 0, n_ltd = 0, n_both = 0, n_none = 0, n_nn = 0, n_all = 0,
      n_comp = 0, n_frozen = 0, n_sat = 0, n_gated = 0, n_load = 0, n_post_spk = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  // ---------------- reference model ----------------
  int rv [8], rh [8], rw [4][4], rdw [4][4], rcur [4];

  function automatic int lif_ref(inout int v, input int cur);
    int mag, dec, sum, fire;
    mag  = v - EREST;               // EREST = 0 and v >= 0 here
    dec  = ref_llsmu(ETAU, mag, 0) / 256;
    sum  = EREST + cur + dec;
    fire = (sum > VTH) ? 1 : 0;
    v    = (fire != 0) ? EREST : (sum < 0 ? 0 : (sum > 255 ? 255 : sum));
    return fire;
  endfunction

  function automatic int signed10(input int v);
    return v >= 512 ? v - 1024 : v;
  endfunction

  task automatic ref_step(input int ext [4], input logic [7:0] en, input stdp_cfg_t c,
                          output logic [7:0] sp);
    bit nn;
    nn = (c.pairing == PAIR_NEAREST);
    for (int n = 0; n < 8; n++) begin
      int cur, f;
      cur = (n < 4) ? ext[n] : rcur[n - 4];
      f = lif_ref(rv[n], cur);
      sp[n] = f[0] & en[n];
      if (f[0] && !en[n]) n_gated++;
      if (n >= 4 && sp[n]) n_post_spk++;
      rh[n] = (int'(sp[n]) << 6) | (rh[n] >> 1);
    end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      int raw, sc;
      bit pf, qf;
      pf = rh[i][6]; qf = rh[4 + j][6];
      if (qf && !pf)      begin raw =  ref_mag(rh[i], nn);     if (c.learn_en) n_ltp++; end
      else if (pf && !qf) begin raw = -ref_mag(rh[4 + j], nn); if (c.learn_en) n_ltd++; end
      else begin raw = 0; if (pf) n_both++; else n_none++; end
      if (!c.learn_en && (pf ^ qf)) n_frozen++;
      if (!c.learn_en) raw = 0;
      if (raw != 0 && nn) n_nn++;
      if (raw != 0 && !nn) n_all++;
      if (raw != 0 && c.comp_en) n_comp++;
      sc = ref_scale(raw, int'(c.lr_shift), c.comp_en);
      if (rw[i][j] + sc > 127 || rw[i][j] + sc < -128) n_sat++;
      rw[i][j] = sat8(rw[i][j] + sc);
      rdw[i][j] = sc;
    end
    for (int j = 0; j < 4; j++) begin
      rcur[j] = 0;
      for (int i = 0; i < 4; i++) if (sp[i]) rcur[j] += rw[i][j];
    end
  endtask

  // ---------------- stimulus ----------------
  initial begin
    int ext [4];
    logic [7:0] rsp;
    cfg = '0;
    for (int n = 0; n < 8; n++) begin rv[n] = EREST; rh[n] = 0; end
    for (int j = 0; j < 4; j++) rcur[j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int blk = 0; blk < 16; blk++) begin
      // load a fresh set of weights while idle
      for (int k = 0; k < 16; k++) begin
        int lv;
        lv = (blk % 3 == 2) ? int'($urandom_range(255)) - 128 : 20 + int'($urandom_range(100));
        w_load = 1; w_load_idx = 4'(k); w_load_val = 8'(lv);
        @(negedge clk);
        rw[k / 4][k % 4] = lv;
        n_load++;
      end
      w_load = 0;
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++)
        check("loaded weight", int'($signed(weights[i][j])), rw[i][j]);

      for (int step = 0; step < 40; step++) begin
        int t;
        logic [7:0] en;
        cfg.learn_en = (blk % 4 != 3);
        cfg.pairing  = (blk % 2 == 0) ? PAIR_NEAREST : PAIR_ALL_TO_ALL;
        cfg.lr_shift = 3'((blk % 6 == 1) ? 1 : 0);
        cfg.comp_en  = (blk % 5 == 4);
        en = ($urandom_range(7) == 0) ? 8'($urandom_range(255)) : 8'hff;
        enable = en;
        if (blk >= 12) begin
          enc_step = 1;
          @(negedge clk);
          enc_step = 0;
        end
        for (int i = 0; i < 4; i++) begin
          if (blk >= 12) begin
            ext[i] = enc_spk[i] ? 200 : 0;
            n_rate_spk += int'(enc_spk[i]);
          end else
            ext[i] = int'($urandom_range(90));
          ext_current[i] = 10'(ext[i]);
        end
        ref_step(ext, en, cfg, rsp);

        step_start = 1;
        @(negedge clk);
        step_start = 0;
        t = 1;
        while (!step_done) begin
          @(negedge clk);
          t++;
          if (t > 100) break;
        end
        check("step clocks", t, STEP_CLOCKS);
        check("spikes", int'(spikes), int'(rsp));
        for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
          check("weight", int'($signed(weights[i][j])), rw[i][j]);
          check("dw", int'($signed(dws[i][j])), rdw[i][j]);
        end
        for (int j = 0; j < 4; j++)
          check("post current", signed10(int'(post_current[j])), rcur[j]);
        @(negedge clk);
        check("idle", int'(busy), 0);
      end
    end

    $display("rate-coded input spikes=%0d", n_rate_spk);
    check("rate-coded inputs were applied", int'(n_rate_spk > 100), 1);
    $display("ltp=%0d ltd=%0d both=%0d none=%0d nn=%0d all=%0d comp=%0d frozen=%0d sat=%0d gated=%0d load=%0d post_spk=%0d",
             n_ltp, n_ltd, n_both, n_none, n_nn, n_all, n_comp, n_frozen, n_sat, n_gated, n_load, n_post_spk);
    checks++;
    if (n_ltp == 0 || n_ltd == 0 || n_both == 0 || n_none == 0 || n_nn == 0 || n_all == 0 ||
        n_comp == 0 || n_frozen == 0 || n_sat == 0 || n_gated == 0 || n_load == 0 || n_post_spk == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
