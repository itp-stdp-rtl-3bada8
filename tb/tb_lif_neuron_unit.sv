// tb_lif_neuron_unit -- runs 8 time-multiplexed neurons for many steps with
// random input currents, issuing one neuron per clock back to back, and
// checks every result (spike, new potential, index) against a reference
// LIF model built on the Mitchell/Karatsuba reference multiplier, plus the
// 8-clock latency. A second instance with a non-zero resting potential
// exercises the V < E_rest (negative difference) path.
module tb_lif_neuron_unit;
  import tb_ref_pkg::*;
  localparam int ETAU = 199, ER0 = 0, VTH0 = 128, ER1 = 40, VTH1 = 150;
  localparam int LAT = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [2:0] in_idx = 0;
  logic signed [9:0] in_current = 0;
  logic ov0, ov1, sp0, sp1;
  logic [2:0] oi0, oi1;
  logic [7:0] v0, v1;
  int checks = 0, failures = 0, cyc = 0;
  int spikes0 = 0, quiet0 = 0, below_rest1 = 0, spikes1 = 0;

  lif_neuron_unit #(.E_TAU(ETAU), .E_REST(ER0), .V_TH(VTH0)) dut0 (
    .clk, .rst_n, .in_valid, .in_idx, .in_current,
    .out_valid(ov0), .out_idx(oi0), .out_spike(sp0), .out_v(v0));
  lif_neuron_unit #(.E_TAU(ETAU), .E_REST(ER1), .V_TH(VTH1)) dut1 (
    .clk, .rst_n, .in_valid, .in_idx, .in_current,
    .out_valid(ov1), .out_idx(oi1), .out_spike(sp1), .out_v(v1));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int vref0 [8], vref1 [8];
  typedef struct { int idx; int sp0; int v0; int sp1; int v1; int cyc; } exp_t;
  exp_t q[$];

  // reference LIF update; returns spike, updates v
  function automatic int lif_ref(inout int v, input int cur, input int er, input int vth);
    int diff, mag, dec, sum, vc, fire;
    diff = v - er;
    mag  = diff < 0 ? -diff : diff;
    dec  = ref_llsmu(ETAU, mag, 0) / 256;
    if (diff < 0) dec = -dec;
    sum  = er + cur + dec;
    vc   = sum < 0 ? 0 : (sum > 255 ? 255 : sum);
    fire = (sum > vth) ? 1 : 0;
    v    = (fire != 0) ? er : vc;
    return fire;
  endfunction

  always @(negedge clk) if (rst_n && ov0) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    if (int'(oi0) != e.idx || int'(sp0) != e.sp0 || int'(v0) != e.v0 ||
        !ov1 || int'(oi1) != e.idx || int'(sp1) != e.sp1 || int'(v1) != e.v1) begin
      failures++;
      if (failures < 10)
        $display("FAIL idx %0d/%0d sp %0d/%0d v %0d/%0d | sp1 %0d/%0d v1 %0d/%0d",
                 oi0, e.idx, sp0, e.sp0, v0, e.v0, sp1, e.sp1, v1, e.v1);
    end
    checks++;
    if (cyc - e.cyc != LAT) begin
      failures++;
      $display("FAIL latency %0d", cyc - e.cyc);
    end
    if (e.sp0 != 0) spikes0++; else quiet0++;
    if (e.sp1 != 0) spikes1++;
  end

  initial begin
    for (int n = 0; n < 8; n++) begin vref0[n] = ER0; vref1[n] = ER1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int step = 0; step < 200; step++) begin
      for (int n = 0; n < 8; n++) begin
        exp_t e;
        int cur, vb;
        // mostly moderate drive, sometimes strongly negative
        cur = ($urandom_range(4) == 0) ? -int'($urandom_range(120))
                                       : int'($urandom_range(70));
        @(negedge clk);
        in_valid = 1; in_idx = 3'(n); in_current = 10'(cur);
        vb = vref1[n];
        e.idx = n; e.cyc = cyc;
        e.sp0 = lif_ref(vref0[n], cur, ER0, VTH0); e.v0 = vref0[n];
        e.sp1 = lif_ref(vref1[n], cur, ER1, VTH1); e.v1 = vref1[n];
        if (vb < ER1) below_rest1++;
        q.push_back(e);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks += 4;
    if (q.size() != 0) failures++;
    if (spikes0 == 0 || quiet0 == 0) begin failures++; $display("FAIL no spike mix"); end
    if (below_rest1 == 0) begin failures++; $display("FAIL negative path unused"); end
    if (spikes1 == 0) failures++;
    $display("spikes0=%0d quiet0=%0d spikes1=%0d below_rest1=%0d", spikes0, quiet0, spikes1, below_rest1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
