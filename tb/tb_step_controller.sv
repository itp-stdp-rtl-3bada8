// tb_step_controller -- models the neuron unit, synapses and accumulator
// with their latencies (spikes 9 clocks after the last issue, update
// 2 clocks, accumulate 1 clock) and checks the order of the controller's
// outputs: 8 consecutive issues 0..7, then one shift pulse, one update
// pulse, one accumulate pulse, then step_done; start is ignored while busy,
// and the step takes the expected number of clocks.
module tb_step_controller;
  logic clk = 0, rst_n = 0, start = 0;
  logic spikes_done = 0, upd_done = 0, acc_done = 0;
  logic issue_valid, hist_shift, stdp_upd, acc_start, busy, step_done;
  logic [2:0] issue_idx;
  int checks = 0, failures = 0, cyc = 0;

  step_controller dut (.clk, .rst_n, .start, .spikes_done, .upd_done, .acc_done,
    .issue_valid, .issue_idx, .hist_shift, .stdp_upd, .acc_start, .busy, .step_done);
  always #5 clk = ~clk;

  // responders
  int last_issue = -100, upd_at = -100, acc_at = -100;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (issue_valid && issue_idx == 3'd7) last_issue <= cyc;
    if (stdp_upd) upd_at <= cyc;
    if (acc_start) acc_at <= cyc;
    spikes_done <= (cyc == last_issue + 8);   // valid 9 clocks after issue
    upd_done    <= (cyc == upd_at + 1);       // 2 clocks after the pulse
    acc_done    <= acc_start;                 // 1 clock after start
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int step = 0; step < 50; step++) begin
      int t0, n_issue, n_shift, n_upd, n_acc, order, len;
      repeat ($urandom_range(3)) @(negedge clk);
      check("idle", !busy);
      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      n_issue = 0; n_shift = 0; n_upd = 0; n_acc = 0; order = 0;
      len = 0;
      while (1) begin
        check("busy", busy);
        if (issue_valid) begin
          check("issue index", int'(issue_idx) == n_issue);
          check("issue before rest", order == 0);
          n_issue++;
        end
        if (hist_shift) begin check("shift after issues", n_issue == 8 && order == 0); order = 1; n_shift++; end
        if (stdp_upd)   begin check("upd after shift", order == 1); order = 2; n_upd++; end
        if (acc_start)  begin check("acc after upd", order == 2); order = 3; n_acc++; end
        // a start in the middle of a step is ignored
        start = ($urandom_range(5) == 0);
        if (step_done) break;
        @(negedge clk);
        len++;
      end
      start = 0;
      check("one of each", n_issue == 8 && n_shift == 1 && n_upd == 1 && n_acc == 1);
      // 8 issues, 9-clock spike latency, shift, upd, 2-clock update,
      // accumulate, 1-clock accumulator = 22 clocks after the start clock
      check("step length", len == 22);
      if (len != 22) $display("len=%0d", len);
      @(negedge clk);
      check("back to idle", !busy);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
