// tb_llsmu -- streams operand pairs (corners and random) through the
// pipelined segmented multiplier, one per clock, and checks every product
// against the Karatsuba/Mitchell reference, its accuracy against the exact
// product, and the 4-clock latency of out_valid.
module tb_llsmu;
  import tb_ref_pkg::*;
  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, out_valid;
  logic [7:0]  a = 0, b = 0;
  logic [15:0] p;
  int checks = 0, failures = 0;
  int exp_q[$];
  int cyc = 0, issue_cyc[$];
  localparam int LAT = 4;

  llsmu #(.N(4)) dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .p);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(negedge clk) if (rst_n && out_valid) begin
    automatic int e, c;
    e = exp_q.pop_front();
    c = issue_cyc.pop_front();
    checks++;
    if (int'(p) != e) begin
      failures++;
      if (failures < 10) $display("FAIL p=%0d exp=%0d", p, e);
    end
    checks++;
    if (cyc - c != LAT) begin
      failures++;
      $display("FAIL latency %0d", cyc - c);
    end
  end

  initial begin
    automatic int n = 0;
    automatic real err_sum = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int va, vb;
      if (i < 16) begin
        va = ((i & 1) != 0) ? 255 : (i * 17) % 256;
        vb = ((i & 2) != 0) ? 255 : (i * 29) % 256;
      end else begin
        va = $urandom_range(255);
        vb = $urandom_range(255);
      end
      @(negedge clk);
      a = 8'(va); b = 8'(vb);
      in_valid = ($urandom_range(3) != 0);
      if (in_valid) begin
        exp_q.push_back(ref_llsmu(va, vb, 0));
        issue_cyc.push_back(cyc);
        if (va * vb >= 1024) begin
          err_sum += (real'(ref_llsmu(va, vb, 0)) - real'(va * vb)) / real'(va * vb);
          n++;
        end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    // mean signed relative error of the approximation stays small
    checks++;
    if (err_sum / n > 0.05 || err_sum / n < -0.05) begin
      failures++;
      $display("FAIL mean error %f", err_sum / n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
