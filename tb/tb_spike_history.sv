// tb_spike_history -- shifts random spike vectors in (with idle clocks in
// between) and checks that bit k of neuron n's history is the spike that
// neuron emitted k+1 shifts before the newest (MSB = newest).
module tb_spike_history;
  logic clk = 0, rst_n = 0, shift = 0;
  logic [7:0] spikes = 0;
  logic [7:0][6:0] hist;
  int checks = 0, failures = 0;
  logic [7:0] past[$];

  spike_history dut (.clk, .rst_n, .shift, .spikes, .hist);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (hist != '0) failures++;
    for (int it = 0; it < 1000; it++) begin
      spikes = 8'($urandom_range(255));
      shift = ($urandom_range(2) != 0);
      if (shift) past.push_front(spikes);
      @(negedge clk);
      shift = 0;
      for (int n = 0; n < 8; n++)
        for (int k = 0; k < 7; k++) begin
          logic e;
          e = (k < past.size()) ? past[k][n] : 1'b0;  // k = 0 is newest
          checks++;
          if (hist[n][6-k] != e) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d age=%0d", n, k);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
