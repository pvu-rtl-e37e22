// pvu_mul: vector posit multiplication on decoded operands (PIR).
// Per lane: sign = XOR of the signs; mantissa product by the radix-4 Booth
// multiplier (booth_mul) whose sum and carry words are added here; exponent =
// sum of the exponents, saturated to +-(MAXSCALE+2) with MAXSCALE =
// (N-2)*2^ES, the scale of maxpos, so that no later stage can overflow. Any
// value beyond that bound saturates to maxpos/minpos in the encoder anyway.
// The 2F-bit product has two integer bits, the shared vector result format
// (see pvu_addsub), and is exact, so sticky is 0. The dot-product unit reuses
// these outputs. Combinational.
module pvu_mul #(
  parameter int unsigned LANES = 4,
  parameter int unsigned N     = 32,
  parameter int unsigned ES    = 2,
  parameter int unsigned F     = N - ES - 2,
  parameter int unsigned XW    = 10,
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
  localparam int unsigned PW  = 2 * F + 2;
  localparam int signed   LIM = ((N - 2) << ES) + 2;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [PW-1:0]         s, c, p;
    logic signed [RXW-1:0] esum;

    booth_mul #(.WA(F), .WB(F), .PW(PW)) u_mul (
      .a(a_frac[l]), .b(b_frac[l]), .sum(s), .carry(c));
    assign p = s + c;

    assign esum = RXW'($signed(a_exp[l])) + RXW'($signed(b_exp[l]));

    always_comb begin
      if (esum > RXW'(LIM))       r_exp[l] = RXW'(LIM);
      else if (esum < -RXW'(LIM)) r_exp[l] = -RXW'(LIM);
      else                        r_exp[l] = esum;
    end

    assign r_nar[l]    = a_nar[l] | b_nar[l];
    assign r_zero[l]   = !r_nar[l] && (a_zero[l] || b_zero[l]);
    assign r_sign[l]   = (a_sign[l] ^ b_sign[l]) && !r_zero[l];
    assign r_mant[l]   = MW'(p[2*F-1:0]) << (MW - 2*F);
    assign r_sticky[l] = 1'b0;
    wire unused = ^p[PW-1:2*F];
  end
endmodule
