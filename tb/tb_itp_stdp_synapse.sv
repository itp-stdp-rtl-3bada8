// tb_itp_stdp_synapse -- drives one synapse with random pre/post histories
// and configurations and checks, for every update, the scaled weight
// change, the saturated new weight and the 2-clock update latency.
// Counts and requires every case: LTP, LTD, both fired, none fired,
// nearest and all-to-all pairing, compensation, learning disabled,
// saturation at both ends, weight load. Finally checks one update per
// clock when updates arrive back to back. A second synapse with a 5-step
// history (the depth is a parameter) runs alongside on its own random
// histories and is checked the same way.
module tb_itp_stdp_synapse;
  import itp_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  stdp_cfg_t cfg;
  logic upd = 0, w_load = 0, upd_done;
  logic [6:0] pre_hist = 0, post_hist = 0;
  logic signed [7:0] w_load_val = 0, weight, dw;
  int checks = 0, failures = 0;
  int n_ltp = 0, n_ltd = 0, n_both = 0, n_none = 0, n_nn = 0, n_all = 0;
  int n_comp = 0, n_frozen = 0, n_satp = 0, n_satn = 0, n_load = 0;
  logic [4:0] pre5 = 0, post5 = 0;
  logic signed [7:0] weight5, dw5;
  logic upd_done5;

  itp_stdp_synapse #(.D(7), .W_W(8)) dut (
    .clk, .rst_n, .cfg, .upd, .pre_hist, .post_hist, .w_load, .w_load_val,
    .weight, .dw, .upd_done);
  itp_stdp_synapse #(.D(5), .W_W(8)) dut5 (
    .clk, .rst_n, .cfg, .upd, .pre_hist(pre5), .post_hist(post5), .w_load,
    .w_load_val, .weight(weight5), .dw(dw5), .upd_done(upd_done5));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  initial begin
    int wref, d, sc, raw, w5ref, raw5, sc5;
    bit pf, qf, nn;
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset weight", int'(weight), 0);
    wref = 0; w5ref = 0;
    for (int it = 0; it < 3000; it++) begin
      // occasionally load a weight (near the limits to provoke saturation)
      if ($urandom_range(15) == 0) begin
        int lv;
        lv = ($urandom_range(1) != 0) ? 120 - int'($urandom_range(20)) : -120 + int'($urandom_range(20));
        w_load = 1; w_load_val = 8'(lv);
        @(negedge clk);
        w_load = 0;
        wref = lv; w5ref = lv; n_load++;
        check("load", int'(weight), wref);
        check("load D=5", int'(weight5), w5ref);
      end
      pre_hist  = 7'($urandom_range(127));
      post_hist = 7'($urandom_range(127));
      cfg.learn_en = ($urandom_range(7) != 0);
      cfg.pairing  = ($urandom_range(1) != 0) ? PAIR_NEAREST : PAIR_ALL_TO_ALL;
      cfg.lr_shift = 3'($urandom_range(3) == 0 ? $urandom_range(7) : 0);
      cfg.comp_en  = ($urandom_range(3) == 0);
      pf = pre_hist[6]; qf = post_hist[6];
      nn = (cfg.pairing == PAIR_NEAREST);
      pre5  = 5'($urandom_range(31));
      post5 = 5'($urandom_range(31));
      if (post5[4] && !pre5[4])      raw5 =  ref_mag(int'(pre5),  nn);
      else if (pre5[4] && !post5[4]) raw5 = -ref_mag(int'(post5), nn);
      else                           raw5 = 0;
      if (!cfg.learn_en) raw5 = 0;
      sc5 = ref_scale(raw5, int'(cfg.lr_shift), cfg.comp_en);
      // reference change
      if (qf && !pf)      begin raw =  ref_mag(int'(pre_hist),  nn); n_ltp++; end
      else if (pf && !qf) begin raw = -ref_mag(int'(post_hist), nn); n_ltd++; end
      else begin raw = 0; if (pf) n_both++; else n_none++; end
      if (!cfg.learn_en) begin raw = 0; n_frozen++; end
      sc = ref_scale(raw, int'(cfg.lr_shift), cfg.comp_en);
      if (nn) n_nn++; else n_all++;
      if (cfg.comp_en && raw != 0) n_comp++;
      if (wref + sc > 127) n_satp++;
      if (wref + sc < -128) n_satn++;
      upd = 1;
      @(negedge clk);
      upd = 0;
      check("no early done", int'(upd_done), 0);
      @(negedge clk);
      check("done after 2 clocks", int'(upd_done), 1);
      wref = sat8(wref + sc);
      check("weight", int'(weight), wref);
      check("dw", int'(dw), sc);
      w5ref = sat8(w5ref + sc5);
      check("weight D=5", int'(weight5), w5ref);
      check("dw D=5", int'(dw5), sc5);
      check("done D=5", int'(upd_done5), 1);
      // hold pre/post changes between updates: nothing must happen
      pre_hist = 7'h40; post_hist = 7'h00;
      pre5 = 5'h10; post5 = 5'h00;
      @(negedge clk);
      check("hold", int'(weight), wref);
    end
    // throughput: one update per clock, back to back; update k is
    // visible two clocks after it was issued
    begin
      int wexp [64];
      cfg.learn_en = 1; cfg.comp_en = 0; cfg.lr_shift = 0;
      cfg.pairing = PAIR_ALL_TO_ALL;
      pre5 = 5'h0; post5 = 5'h0;
      for (int k = 0; k < 64 + 1; k++) begin
        if (k < 64) begin
          pre_hist  = 7'($urandom_range(127));
          post_hist = 7'($urandom_range(127));
          pf = pre_hist[6]; qf = post_hist[6];
          if (qf && !pf)      raw =  int'(pre_hist);
          else if (pf && !qf) raw = -int'(post_hist);
          else                raw = 0;
          wref = sat8(wref + raw);
          wexp[k] = wref;
          upd = 1;
        end else upd = 0;
        @(negedge clk);
        if (k >= 1) check("back-to-back done", int'(upd_done), 1);
        if (k >= 1) check($sformatf("back-to-back weight k=%0d", k), int'(weight), wexp[k-1]);
      end
      upd = 0;
      check("D=5 unchanged when nobody fired", int'(weight5), w5ref);
    end
    $display("ltp=%0d ltd=%0d both=%0d none=%0d nn=%0d all=%0d comp=%0d frozen=%0d satp=%0d satn=%0d load=%0d",
             n_ltp, n_ltd, n_both, n_none, n_nn, n_all, n_comp, n_frozen, n_satp, n_satn, n_load);
    checks++;
    if (n_ltp == 0 || n_ltd == 0 || n_both == 0 || n_none == 0 || n_nn == 0 || n_all == 0 ||
        n_comp == 0 || n_frozen == 0 || n_satp == 0 || n_satn == 0 || n_load == 0) begin
      failures++;
      $display("FAIL a case never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
