// tb_weight_read -- exhaustive check of the weight read over all 7-bit
// histories in both pairing modes: all-to-all returns the history itself,
// nearest neighbour returns 2^floor(log2(history)) (the MSB mask). Two
// more instances with history depths 5 and 10 are checked exhaustively too,
// as the depth is a parameter chosen per application.
module tb_weight_read;
  import itp_pkg::*;
  import tb_ref_pkg::*;
  pairing_e   pairing;
  logic [6:0] hist, mag;
  logic [4:0] hist5, mag5;
  logic [9:0] hist10, mag10;
  int checks = 0, failures = 0;

  weight_read #(.D(7)) dut (.pairing, .hist, .mag);
  weight_read #(.D(5)) dut5 (.pairing, .hist(hist5), .mag(mag5));
  weight_read #(.D(10)) dut10 (.pairing, .hist(hist10), .mag(mag10));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++) begin
      for (int h = 0; h < 128; h++) begin
        pairing = (m != 0) ? PAIR_NEAREST : PAIR_ALL_TO_ALL;
        hist = 7'(h);
        #1;
        checks++;
        if (int'(mag) != ref_mag(h, m == 1)) begin
          failures++;
          if (failures < 10) $display("FAIL mode=%0d hist=%b mag=%b", m, hist, mag);
        end
      end
    end
    for (int m = 0; m < 2; m++) begin
      for (int h = 0; h < 1024; h++) begin
        pairing = (m != 0) ? PAIR_NEAREST : PAIR_ALL_TO_ALL;
        hist5  = 5'(h);
        hist10 = 10'(h);
        #1;
        checks += 2;
        if (int'(mag5) != ref_mag(h % 32, m == 1)) begin
          failures++;
          if (failures < 10) $display("FAIL D=5 mode=%0d hist=%b mag=%b", m, hist5, mag5);
        end
        if (int'(mag10) != ref_mag(h, m == 1)) begin
          failures++;
          if (failures < 10) $display("FAIL D=10 mode=%0d hist=%b mag=%b", m, hist10, mag10);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
