// tb_stdp_window -- measures the STDP learning window of the whole engine.
//
// One pre spike (neuron 0) and one post spike (neuron 4) are placed dt
// steps apart, for dt = 0..8 and both orders. After the second spike the
// change of weight w[0][0] must be
//   post after pre  (LTP): +64 * 2^-dt   (Q1.6, i.e. +2^-dt)
//   pre after post  (LTD): -64 * 2^-dt
//   same step or dt >= 7 (outside the 7-step history): 0
// scaled by the learning-rate shift and the ln 2 compensation where these
// are switched on; the window is run with nearest-neighbour and all-to-all
// pairing (identical for a single pair). Without scaling the window is also
// checked against exponential pair STDP, A * e^(-dt/tau) with tau = 1/ln 2
// steps, computed in real arithmetic. How the spikes are placed: input
// neurons 0..2 receive a large constant current and fire every step, and the
// per-neuron enable decides in which steps their spikes count. Neuron 4 is
// driven only through w[1][0] = w[2][0] = 127, so it fires exactly one step
// after neurons 1 and 2 are enabled together.
module tb_stdp_window;
  import itp_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic step_start = 0, w_load = 0, busy, step_done;
  logic [3:0][9:0] ext_current;
  stdp_cfg_t cfg;
  logic [7:0] enable;
  logic [3:0] w_load_idx = 0;
  logic [7:0] w_load_val = 0;
  logic [7:0] spikes;
  logic [3:0][3:0][7:0] weights, dws;
  logic [3:0][9:0] post_current;
  int checks = 0, failures = 0;

  itp_stdp_engine dut (.clk, .rst_n, .step_start, .ext_current, .cfg, .enable,
    .w_load, .w_load_idx, .w_load_val, .busy, .step_done, .spikes, .weights,
    .dws, .post_current);
  always #5 clk = ~clk;

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

  // neuron 4 always enabled; pre0 / drive (pre1+pre2) as requested
  task automatic step(input bit pre0, input bit drive);
    enable = {4'b0001, 1'b0, drive, drive, pre0};
    step_start = 1;
    @(negedge clk);
    step_start = 0;
    while (!step_done) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic load(input int idx, input int val);
    w_load = 1; w_load_idx = 4'(idx); w_load_val = 8'(val);
    @(negedge clk);
    w_load = 0;
  endtask

  initial begin
    int w_before, expv, mode;
    ext_current = {10'd0, 10'd200, 10'd200, 10'd200};
    enable = '0;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (mode = 0; mode < 4; mode++) begin
      cfg.learn_en = 1;
      cfg.pairing  = (mode == 1) ? PAIR_ALL_TO_ALL : PAIR_NEAREST;
      cfg.lr_shift = (mode == 3) ? 3'd1 : 3'd0;
      cfg.comp_en  = (mode == 2);
      for (int ltp = 0; ltp < 2; ltp++) begin
        for (int dt = 0; dt <= 8; dt++) begin
          load(0, 0); load(4, 127); load(8, 127);
          repeat (9) step(0, 0);                 // clear all histories
          w_before = int'($signed(weights[0][0]));
          if (ltp == 1) begin
            // pre at step 0, post at step dt (driven at dt-1)
            if (dt == 0) begin
              // same step: drive one step earlier, pre0 with the post spike
              step(0, 1);
              step(1, 0);
              check("post fired", int'(spikes[4]), 1);
            end else begin
              for (int s = 0; s <= dt; s++) begin
                step(s == 0, s == dt - 1);
                if (s < dt) check("no early post", int'(spikes[4]), 0);
              end
              check("post fired", int'(spikes[4]), 1);
            end
            expv = (dt == 0 || dt >= 7) ? 0 : 64 / (2 ** dt);
          end else begin
            // post at step 0 (driven one step before), pre at step dt
            step(0, 1);
            for (int s = 0; s <= dt; s++) begin
              step(s == dt, 0);
              if (s == 0) check("post fired", int'(spikes[4]), 1);
            end
            expv = (dt == 0 || dt >= 7) ? 0 : -64 / (2 ** dt);
          end
          expv = ref_scale(expv, int'(cfg.lr_shift), cfg.comp_en);
          check($sformatf("window mode=%0d ltp=%0d dt=%0d", mode, ltp, dt),
                int'($signed(weights[0][0])) - w_before, expv);
          // exponential pair STDP, A = 64 LSB, tau = 1/ln 2 steps: the same
          // window, as the base-2 rule is e^(-dt/tau) at this time resolution
          if (mode == 0)
            check($sformatf("exp-STDP dt=%0d", dt),
                  int'($signed(weights[0][0])) - w_before,
                  (dt == 0 || dt >= 7) ? 0 :
                  (ltp == 1 ? 1 : -1) * int'($floor(64.0 * $exp(-real'(dt) * $ln(2.0)) + 0.5)));
          if (mode == 0)
            $display("dt=%0s%0d  dw=%0d/64", ltp ? "+" : "-", dt,
                     int'($signed(weights[0][0])) - w_before);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
