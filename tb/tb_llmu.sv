// tb_llmu -- exhaustive check of the compensated Mitchell multiplier over
// all 5-bit operand pairs against the real-number reference, plus a bound
// on its error against the exact product and its one-clock latency.
module tb_llmu;
  import tb_ref_pkg::*;
  logic       clk = 0;
  logic [4:0] x, y;
  logic [10:0] p;
  int checks = 0, failures = 0;

  llmu #(.OP_W(5)) dut (.clk, .x, .y, .p);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_p, exact, carry_cases;
    carry_cases = 0;
    for (int a = 0; a < 32; a++) begin
      for (int b = 0; b < 32; b++) begin
        x = 5'(a); y = 5'(b);
        @(posedge clk); #1;
        exp_p = ref_mitchell(a, b);
        checks++;
        if (int'(p) != exp_p) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d y=%0d p=%0d exp=%0d", a, b, p, exp_p);
        end
        exact = a * b;
        // compensated Mitchell stays within ~12 % of the exact product
        if (exact > 0) begin
          checks++;
          if ((real'(int'(p)) - real'(exact)) > 0.12 * real'(exact) + 1.0 ||
              (real'(exact) - real'(int'(p))) > 0.12 * real'(exact) + 1.0) begin
            failures++;
            $display("FAIL error bound x=%0d y=%0d p=%0d exact=%0d", a, b, p, exact);
          end
        end
        if (a > 0 && b > 0 &&
            (real'(a) / (2.0 ** ilog2(a)) + real'(b) / (2.0 ** ilog2(b)) >= 3.0))
          carry_cases++;
      end
    end
    // latency: a new operand pair shows after exactly one clock edge
    x = 5'd3; y = 5'd3; @(posedge clk); #1;
    x = 5'd31; y = 5'd31; #1;
    checks++;
    if (int'(p) != ref_mitchell(3, 3)) failures++;
    @(posedge clk); #1;
    checks++;
    if (int'(p) != ref_mitchell(31, 31)) failures++;
    checks++;
    if (carry_cases == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
