// pvu_div: vector posit division on decoded operands (PIR).
// Per lane: sign = XOR of the signs, exponent = difference of the exponents.
// The mantissa quotient a/b is turned into a product: nr_recip gives an
// approximate reciprocal of b's mantissa (three Newton steps), and a radix-4
// Booth multiplier forms a * (1/b); its sum and carry words are added and the
// product, in (0.5,2), is cut to the shared MW-bit vector format with two
// integer bits, the dropped bits ORed into sticky. Because the reciprocal is
// approximate, the result is not always the correctly rounded quotient.
// Division by zero or a NaR operand gives NaR; 0/b gives zero.
// Combinational.
module pvu_div #(
  parameter int unsigned LANES = 4,
  parameter int unsigned F     = 28,
  parameter int unsigned XW    = 10,
  parameter int unsigned ITER  = 3,
  parameter int unsigned MW    = 2 * F,
  parameter int unsigned RXW   = XW + 2
) (
  input  logic [LANES-1:0]          a_sign, a_zero, a_nar,
  input  logic [LANES-1:0][XW-1:0]  a_exp,
  input  logic [LANES-1:0][F-1:0]   a_frac,
  input  logic [LANES-1:0]          b_sign, b_zero, b_nar,
  input  logic [LANES-1:0][XW-1:0]  b_exp,
  input  logic [LANES-1:0][F-1:0]   b_frac,
  output logic [LANES-1:0]          r_sign, r_zero, r_nar, r_sticky,
  output logic [LANES-1:0][RXW-1:0] r_exp,
  output logic [LANES-1:0][MW-1:0]  r_mant
);
  localparam int unsigned RW = F + 4;
  localparam int unsigned QW = F + RW + 1;          // Q2.(F-1+RW)
  localparam int unsigned PW = QW + 2;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [RW:0]   x;
    logic [PW-1:0] s, c, q;

    nr_recip #(.F(F), .RW(RW), .ITER(ITER)) u_rcp (.d(b_frac[l]), .x(x));
    booth_mul #(.WA(F), .WB(RW+1), .PW(PW)) u_mul (
      .a(a_frac[l]), .b(x), .sum(s), .carry(c));
    assign q = s + c;

    assign r_exp[l]    = RXW'($signed(a_exp[l])) - RXW'($signed(b_exp[l]));
    assign r_nar[l]    = a_nar[l] | b_nar[l] | b_zero[l];
    assign r_zero[l]   = !r_nar[l] && a_zero[l];
    assign r_sign[l]   = (a_sign[l] ^ b_sign[l]) && !r_zero[l];
    assign r_mant[l]   = q[QW-1 -: MW];
    assign r_sticky[l] = |q[QW-MW-1:0];
    wire unused = ^q[PW-1:QW];
  end
endmodule
