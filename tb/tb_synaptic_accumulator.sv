// tb_synaptic_accumulator -- random spike patterns and signed weights;
// each post current must equal the sum of the weights of the spiking pre
// neurons, one clock after start, and hold until the next start.
module tb_synaptic_accumulator;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [3:0] pre_spikes = 0;
  logic [3:0][3:0][7:0] weights;
  logic [3:0][9:0] current;
  int checks = 0, failures = 0;

  synaptic_accumulator dut (.clk, .rst_n, .start, .pre_spikes, .weights, .current, .done);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [4];
    weights = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++)
        weights[i][j] = (it % 50 == 0) ? (it % 100 == 0 ? 8'h80 : 8'h7f) : 8'($urandom_range(255));
      pre_spikes = (it % 50 == 0) ? 4'hf : 4'($urandom_range(15));
      for (int j = 0; j < 4; j++) begin
        e[j] = 0;
        for (int i = 0; i < 4; i++) if (pre_spikes[i]) e[j] += int'($signed(weights[i][j]));
      end
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (!done) failures++;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (int'($signed(current[j])) != e[j]) begin
          failures++;
          if (failures < 10) $display("FAIL j=%0d got=%0d exp=%0d", j, $signed(current[j]), e[j]);
        end
      end
      // inputs change without start: currents hold
      pre_spikes = ~pre_spikes;
      @(negedge clk);
      checks++;
      if (done) failures++;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (int'($signed(current[j])) != e[j]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
