// tb_rate_encoder -- statistical and structural checks of the rate coder.
//
// Two encoders with the same seed see the same random numbers, so for
// inputs xb >= xa every spike of A must also be a spike of B. Spike rates over
// T steps must match x / 256 within 4 standard deviations. The inter-spike
// intervals (ISI) of a p = 1/4 channel must follow the geometric law of
// Bernoulli sampling, with no correlation between neighbouring steps: mean 1/p and P(ISI <= 7) = 1 - (1-p)^7. The 7-step
// coverage is the quantity used to choose the spike-history depth. Channels
// with equal inputs must not be in lock step, and the spike outputs must only
// change on a step pulse.
module tb_rate_encoder;
  localparam int T = 4096;
  logic clk = 0, rst_n = 0, step = 0;
  logic [3:0][7:0] xa, xb;
  logic [3:0] sa, sb, sa_prev;
  int checks = 0, failures = 0;

  rate_encoder #(.N_CH(4), .X_W(8)) dut_a (.clk, .rst_n, .step, .x(xa), .spikes(sa));
  rate_encoder #(.N_CH(4), .X_W(8)) dut_b (.clk, .rst_n, .step, .x(xb), .spikes(sb));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  task automatic check_near(input string what, input real got, input real exp,
                            input real tol);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      $display("FAIL %s got=%f exp=%f tol=%f", what, got, exp, tol);
    end else
      $display("ok   %s got=%f exp=%f", what, got, exp);
  endtask

  // one step pulse, followed by 0..2 idle cycles during which spikes hold
  task automatic do_step();
    step = 1;
    @(negedge clk);
    step = 0;
    sa_prev = sa;
    repeat ($urandom_range(2)) begin
      @(negedge clk);
      check("spikes hold between steps", sa == sa_prev);
    end
  endtask

  initial begin
    int cnt_a[4], cnt_b[4], eq01, last, n_isi, n_le7, sum_isi, n11;
    logic prev2;
    real p, sd;
    xa = {8'd255, 8'd128, 8'd26, 8'd0};
    xb = {8'd255, 8'd200, 8'd64, 8'd13};
    @(negedge clk);
    check("reset clears spikes", sa == 4'b0 && sb == 4'b0);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < 4; c++) begin cnt_a[c] = 0; cnt_b[c] = 0; end
    last = -1; n_isi = 0; n_le7 = 0; sum_isi = 0; n11 = 0; prev2 = 1'b0;
    for (int t = 0; t < T; t++) begin
      do_step();
      for (int c = 0; c < 4; c++) begin
        cnt_a[c] += int'(sa[c]);
        cnt_b[c] += int'(sb[c]);
        check($sformatf("monotone in x, ch %0d", c), !sa[c] || sb[c]);
      end
      check("x = 0 never spikes", sa[0] == 1'b0);
      n11 += int'(sb[1] && prev2);
      prev2 = sb[1];
      if (sb[1]) begin
        if (last >= 0) begin
          n_isi++;
          sum_isi += t - last;
          if (t - last <= 7) n_le7++;
        end
        last = t;
      end
    end
    for (int c = 0; c < 4; c++) begin
      p = real'(xa[c]) / 256.0;
      sd = $sqrt(p * (1.0 - p) / real'(T));
      check_near($sformatf("rate A ch%0d", c), real'(cnt_a[c]) / real'(T), p, 4.0 * sd + 1e-6);
      p = real'(xb[c]) / 256.0;
      sd = $sqrt(p * (1.0 - p) / real'(T));
      check_near($sformatf("rate B ch%0d", c), real'(cnt_b[c]) / real'(T), p, 4.0 * sd + 1e-6);
    end
    check_near("P(spike at t and t-1) at p = 1/4", real'(n11) / real'(T - 1), 0.0625, 0.02);
    check_near("mean ISI at p = 1/4", real'(sum_isi) / real'(n_isi), 4.0, 0.2);
    check_near("P(ISI <= 7) at p = 1/4", real'(n_le7) / real'(n_isi),
               1.0 - (0.75 ** 7), 0.03);

    // equal inputs on all channels: the channels must not be in lock step
    xa = {4{8'd128}};
    eq01 = 0;
    for (int t = 0; t < 1024; t++) begin
      do_step();
      eq01 += int'(sa[0] == sa[1]) + int'(sa[2] == sa[3]);
    end
    check_near("channel agreement at p = 1/2", real'(eq01) / 2048.0, 0.5, 0.06);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
