// tb_stdp_crossbar -- checks that synapse (i, j) reads history i as pre and
// history 4+j as post, that all 16 weights update in parallel to the
// reference values, that loads reach the indexed weight only, and that a
// partly connected array (second instance) keeps absent synapses at 0.
module tb_stdp_crossbar;
  import itp_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  stdp_cfg_t cfg;
  logic upd = 0, w_load = 0, done_a, done_b;
  logic [7:0][6:0] hist;
  logic [3:0] w_load_idx = 0;
  logic [7:0] w_load_val = 0;
  logic [3:0][3:0][7:0] wa, wb, da, db;
  int checks = 0, failures = 0;
  int wref [4][4];
  localparam logic [15:0] MASK_B = 16'hA5C3;

  stdp_crossbar dut_a (.clk, .rst_n, .cfg, .upd, .hist, .w_load, .w_load_idx,
                       .w_load_val, .weights(wa), .dws(da), .upd_done(done_a));
  stdp_crossbar #(.CONN_MASK(MASK_B)) dut_b (.clk, .rst_n, .cfg, .upd, .hist,
                       .w_load, .w_load_idx, .w_load_val, .weights(wb), .dws(db),
                       .upd_done(done_b));

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
    cfg = '0;
    cfg.learn_en = 1;
    hist = '0;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) wref[i][j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load distinct weights
    for (int k = 0; k < 16; k++) begin
      w_load = 1; w_load_idx = 4'(k); w_load_val = 8'(k * 5 - 40);
      @(negedge clk);
      wref[k / 4][k % 4] = k * 5 - 40;
    end
    w_load = 0;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      check("load a", int'($signed(wa[i][j])), wref[i][j]);
      check("load b", int'($signed(wb[i][j])), MASK_B[i*4+j] ? wref[i][j] : 0);
    end
    for (int it = 0; it < 400; it++) begin
      for (int n = 0; n < 8; n++) hist[n] = 7'($urandom_range(127));
      cfg.pairing = ($urandom_range(1) != 0) ? PAIR_NEAREST : PAIR_ALL_TO_ALL;
      cfg.lr_shift = 3'($urandom_range(2));
      cfg.comp_en = 0;
      upd = 1;
      @(negedge clk);
      upd = 0;
      @(negedge clk);
      check("done", int'(done_a), 1);
      check("done b", int'(done_b), 1);
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        int raw, sc;
        bit pf, qf;
        pf = hist[i][6]; qf = hist[4+j][6];
        if (qf && !pf)      raw =  ref_mag(int'(hist[i]), cfg.pairing == PAIR_NEAREST);
        else if (pf && !qf) raw = -ref_mag(int'(hist[4+j]), cfg.pairing == PAIR_NEAREST);
        else                raw = 0;
        sc = ref_scale(raw, int'(cfg.lr_shift), 1'b0);
        wref[i][j] = sat8(wref[i][j] + sc);
        check("weight a", int'($signed(wa[i][j])), wref[i][j]);
        check("weight b", int'($signed(wb[i][j])), MASK_B[i*4+j] ? wref[i][j] : 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
