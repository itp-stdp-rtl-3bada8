// llsmu -- Logarithmic Linear Segmented Multiply: an approximate 2N x 2N
// multiplier built from three Mitchell multipliers with the Karatsuba
// decomposition.
//
// First each operand is MSB-aligned: its leading one is found and the
// operand is shifted left so that this one sits in the top bit (sa, sb
// places). The aligned operands A', B' are then split and multiplied:
//   A' = 2^N HA + LA,  B' = 2^N HB + LB
//   m0 = M(LA, LB), m1 = M(HA, HB), m2 = M(HA+LA, HB+LB)   (M = llmu)
//   s3 = m2 - m0 - m1
//   P  = (2^(2N) m1 + 2^N s3 + m0) >> (sa + sb + OUT_SHIFT)
// The alignment keeps the upper halves full, so the three small Mitchell
// products always work on significant bits; the final right shift undoes
// it. Alignment, split, three parallel (N+1)-bit products, compose and the
// final shift follow the paper. This design's choices: a zero operand
// gives 0; a composed value below 0 (possible in principle since the
// three approximations do not cancel exactly) is clamped to 0; the result
// saturates at 4N bits; OUT_SHIFT (default 0) is an extra fixed shift, the
// neuron uses 8 for its Q0.8 decay factor.
//
// Timing: four register stages -- align and split, llmu log half, llmu
// antilog half, compose and shift -- so out_valid/p follow in_valid/a/b by
// 4 clocks, one new product per clock. The stage split is this design's.
module llsmu #(
  parameter int unsigned N         = 4,
  parameter int unsigned OUT_SHIFT = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [2*N-1:0] a,
  input  logic [2*N-1:0] b,
  output logic           out_valid,
  output logic [4*N-1:0] p
);
  localparam int unsigned OW = N + 1;           // llmu operand width
  localparam int unsigned MW = 2 * OW + 1;      // llmu product width
  localparam int unsigned CW = 4 * N + 2;       // signed compose width
  localparam int unsigned SHW = $clog2(4 * N);  // alignment shift width

  // Left shift that brings the leading one of v to bit 2N-1.
  function automatic logic [SHW-1:0] align_shift(input logic [2*N-1:0] v);
    align_shift = '0;
    for (int i = 0; i < 2 * N; i++)
      if (v[i]) align_shift = SHW'(2 * N - 1 - i);
  endfunction

  // stage 1: MSB alignment, upper / lower bits and their sums
  logic [SHW-1:0] sa, sb;
  logic [2*N-1:0] aa, ab;
  always_comb begin
    sa = align_shift(a);
    sb = align_shift(b);
    aa = a << sa;
    ab = b << sb;
  end

  logic [OW-1:0]  la_q, lb_q, ha_q, hb_q, sa_q, sb_q;
  logic [SHW-1:0] sh_d [1:3];
  logic           zero_d [1:3];
  always_ff @(posedge clk) begin
    la_q <= OW'(aa[N-1:0]);
    lb_q <= OW'(ab[N-1:0]);
    ha_q <= OW'(aa[2*N-1:N]);
    hb_q <= OW'(ab[2*N-1:N]);
    sa_q <= OW'(aa[N-1:0]) + OW'(aa[2*N-1:N]);
    sb_q <= OW'(ab[N-1:0]) + OW'(ab[2*N-1:N]);
    sh_d[1]   <= sa + sb;
    zero_d[1] <= (a == '0) || (b == '0);
    for (int s = 2; s <= 3; s++) begin
      sh_d[s]   <= sh_d[s-1];
      zero_d[s] <= zero_d[s-1];
    end
  end

  // stages 2-3: three Mitchell multipliers (one internal register each)
  logic [MW-1:0] m0, m1, m2;
  llmu #(.OP_W(OW)) u_m0 (.clk, .x(la_q), .y(lb_q), .p(m0));
  llmu #(.OP_W(OW)) u_m1 (.clk, .x(ha_q), .y(hb_q), .p(m1));
  llmu #(.OP_W(OW)) u_m2 (.clk, .x(sa_q), .y(sb_q), .p(m2));

  logic [MW-1:0] m0_q, m1_q, m2_q;
  always_ff @(posedge clk) begin
    m0_q <= m0;
    m1_q <= m1;
    m2_q <= m2;
  end

  // stage 4: cross term, composition and the shift back
  logic signed [CW-1:0] s3, comp;
  logic [CW-1:0]        comp_pos;
  always_comb begin
    s3   = $signed(CW'(m2_q)) - $signed(CW'(m0_q)) - $signed(CW'(m1_q));
    comp = ($signed(CW'(m1_q)) <<< (2 * N)) + (s3 <<< N) + $signed(CW'(m0_q));
    if (comp[CW-1] || zero_d[3]) comp_pos = '0;
    else comp_pos = (CW'(comp) >> sh_d[3]) >> OUT_SHIFT;
  end

  always_ff @(posedge clk) begin
    p <= (comp_pos > CW'({(4*N){1'b1}})) ? '1 : comp_pos[4*N-1:0];
  end

  // valid pipeline
  logic [3:0] vld;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[2:0], in_valid};
  end
  assign out_valid = vld[3];

endmodule
