// tb_neuron_spike_array -- feeds steps of 8 sequential spikes (with random
// gaps and random enables) and checks the collected vector, the enable
// gating and the step_done pulse after the last neuron.
module tb_neuron_spike_array;
  logic clk = 0, rst_n = 0, in_valid = 0, in_spike = 0, step_done;
  logic [2:0] in_idx = 0;
  logic [7:0] enable = '1, spikes;
  int checks = 0, failures = 0, gated = 0;

  neuron_spike_array dut (.clk, .rst_n, .in_valid, .in_idx, .in_spike, .enable, .spikes, .step_done);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] sp, en, e;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int step = 0; step < 500; step++) begin
      sp = 8'($urandom_range(255));
      en = ($urandom_range(1) == 0) ? 8'hff : 8'($urandom_range(255));
      enable = en;
      e = sp & en;
      if ((sp & ~en) != 0) gated++;
      for (int n = 0; n < 8; n++) begin
        while ($urandom_range(3) == 0) begin
          in_valid = 0;
          @(negedge clk);
          checks++;
          if (step_done) failures++;
        end
        in_valid = 1; in_idx = 3'(n); in_spike = sp[n];
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (spikes[n] != e[n]) failures++;
        checks++;
        if (step_done != (n == 7)) begin
          failures++;
          $display("FAIL step_done at n=%0d", n);
        end
      end
      checks++;
      if (spikes != e) begin
        failures++;
        $display("FAIL spikes %b exp %b", spikes, e);
      end
    end
    checks++;
    if (gated == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
