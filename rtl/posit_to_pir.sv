// posit_to_pir: vector decode stage ("Posit - PIR").
// Decodes the LANES posit elements of both operand vectors in parallel, one
// posit_decode per element, into sign, zero and NaR flags, the unified
// exponent (XW bits) and the mantissa with its hidden bit (F bits).
// Combinational.
module posit_to_pir #(
  parameter int unsigned LANES = 4,
  parameter int unsigned N     = 32,
  parameter int unsigned ES    = 2,
  parameter int unsigned RGM_W = 8,
  parameter int unsigned F     = N - ES - 2,
  parameter int unsigned XW    = RGM_W + ES
) (
  input  logic [LANES-1:0][N-1:0]  pv1,
  input  logic [LANES-1:0][N-1:0]  pv2,
  output logic [LANES-1:0]         a_sign, a_zero, a_nar,
  output logic [LANES-1:0][XW-1:0] a_exp,
  output logic [LANES-1:0][F-1:0]  a_frac,
  output logic [LANES-1:0]         b_sign, b_zero, b_nar,
  output logic [LANES-1:0][XW-1:0] b_exp,
  output logic [LANES-1:0][F-1:0]  b_frac
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    posit_decode #(.N(N), .ES(ES), .RGM_W(RGM_W), .F(F), .XW(XW)) u_da (
      .p(pv1[l]), .zero(a_zero[l]), .nar(a_nar[l]), .sign(a_sign[l]),
      .exp(a_exp[l]), .frac(a_frac[l]));
    posit_decode #(.N(N), .ES(ES), .RGM_W(RGM_W), .F(F), .XW(XW)) u_db (
      .p(pv2[l]), .zero(b_zero[l]), .nar(b_nar[l]), .sign(b_sign[l]),
      .exp(b_exp[l]), .frac(b_frac[l]));
  end
endmodule
