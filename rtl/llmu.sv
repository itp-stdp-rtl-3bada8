// llmu -- Logarithmic Linear Multiply: Mitchell's approximate multiplier
// with a constant error compensation.
//
// For operands x, y > 0 with leading-one positions kx, ky and fractions
// fx = x/2^kx - 1, fy = y/2^ky - 1, the log-domain sum is kx+ky+fx+fy.
//   fx+fy <  1 : p = 2^(kx+ky)   * (1 + fx + fy + C)
//   fx+fy >= 1 : p = 2^(kx+ky+1) * (fx + fy + C/2)
// The second line is what the "IntPart Incrementer" and the C / 0.5C
// multiplexer of the block diagram compute: the carry out of the fraction
// sum raises the integer part of the logarithm by one and halves the
// compensation. (The printed formula for that case omits the factor 2 of
// the incremented exponent; the diagram is followed here.) C = 0.08333 as
// in the paper, held as C_FX/2^FRAC_W. A zero operand gives 0, which is
// this design's choice since the logarithm of 0 is undefined.
//
// Timing: one register stage between the log half (leading-one detection,
// fraction alignment and addition) and the antilog half (shift back), so
// p follows x, y by one clock. No reset: validity is tracked by the user.
module llmu #(
  parameter int unsigned OP_W   = 5,
  parameter int unsigned FRAC_W = 8,
  parameter int unsigned C_FX   = 21,  // round(0.08333 * 2^FRAC_W)
  parameter int unsigned CH_FX  = 11   // round(0.08333/2 * 2^FRAC_W)
) (
  input  logic                clk,
  input  logic [OP_W-1:0]     x,
  input  logic [OP_W-1:0]     y,
  output logic [2*OP_W:0]     p
);
  localparam int unsigned KW = $clog2(OP_W) + 1;  // width of kx+ky+1

  // Leading-one position of a non-zero operand.
  function automatic logic [KW-1:0] lead_one(input logic [OP_W-1:0] v);
    lead_one = '0;
    for (int i = 0; i < OP_W; i++)
      if (v[i]) lead_one = KW'(i);
  endfunction

  // Fraction v/2^k - 1, aligned to FRAC_W bits ("MSB alignment").
  function automatic logic [FRAC_W-1:0] frac(input logic [OP_W-1:0] v,
                                              input logic [KW-1:0] k);
    // the truncating cast drops the leading one
    frac = FRAC_W'({{FRAC_W{1'b0}}, v} << (FRAC_W - int'(k)));
  endfunction

  // ---- log half ----
  logic [KW-1:0]   kx, ky;
  logic [FRAC_W:0] fsum;
  always_comb begin
    kx   = lead_one(x);
    ky   = lead_one(y);
    fsum = {1'b0, frac(x, kx)} + {1'b0, frac(y, ky)};
  end

  logic [KW-1:0]   k_q;
  logic [FRAC_W:0] fsum_q;
  logic            zero_q;
  always_ff @(posedge clk) begin
    k_q    <= kx + ky;
    fsum_q <= fsum;
    zero_q <= (x == '0) || (y == '0);
  end

  // ---- antilog half ----
  localparam int unsigned MW = FRAC_W + 2;            // mantissa width
  localparam int unsigned SW = MW + 2 * OP_W;         // shifted width
  logic          carry;
  logic [KW-1:0] e;        // integer part of the log (K plus the 0/1 MUX)
  logic [MW-1:0] mant;     // 1.f + C, or f(incremented int part) + C/2
  logic [SW-1:0] shifted;
  always_comb begin
    carry = fsum_q[FRAC_W];
    e     = k_q + KW'(carry);
    if (carry) mant = MW'({1'b1, fsum_q[FRAC_W-1:0]}) + MW'(CH_FX);
    else       mant = MW'({1'b1, fsum_q[FRAC_W-1:0]}) + MW'(C_FX);
    shifted = SW'(mant) << e;
    p = zero_q ? '0 : (2*OP_W+1)'(shifted >> FRAC_W);
  end

endmodule
