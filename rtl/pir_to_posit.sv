// pir_to_posit: normalise-and-encode stage ("PIR - Posit").
// Holds a vector path (one pir_norm and one posit_encode per lane) for the
// vector results of add, sub, mul and div, and a scalar path (one pir_norm and
// one posit_encode) for the dot product, with the same internal logic.
// sel_scalar picks the output: the scalar result goes to lane 0 and the other
// lanes are zero; otherwise the vector result is output. Combinational.
module pir_to_posit #(
  parameter int unsigned LANES = 4,
  parameter int unsigned N     = 32,
  parameter int unsigned ES    = 2,
  parameter int unsigned F     = N - ES - 2,
  parameter int unsigned RXW   = 12,
  parameter int unsigned MW    = 2 * F,
  parameter int unsigned MWS   = 2 * F + 4 + $clog2(LANES),
  parameter int unsigned IWS   = 2 + $clog2(LANES)
) (
  input  logic                      sel_scalar,
  input  logic [LANES-1:0]          v_sign, v_zero, v_nar, v_sticky,
  input  logic [LANES-1:0][RXW-1:0] v_exp,
  input  logic [LANES-1:0][MW-1:0]  v_mant,
  input  logic                      s_sign, s_zero, s_nar, s_sticky,
  input  logic [RXW-1:0]            s_exp,
  input  logic [MWS-1:0]            s_mant,
  output logic [LANES-1:0][N-1:0]   posit_rst
);
  localparam int unsigned XO = RXW + 1;

  logic [LANES-1:0][N-1:0] vec;
  logic [N-1:0]            sca;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic sg, zr, nr, st;
    logic [XO-1:0] ex;
    logic [F:0]    fr;
    pir_norm #(.MW(MW), .IW(2), .XI(RXW), .XO(XO), .F(F)) u_norm (
      .sign_i(v_sign[l]), .zero_i(v_zero[l]), .nar_i(v_nar[l]), .sticky_i(v_sticky[l]),
      .exp_i(v_exp[l]), .mant_i(v_mant[l]),
      .sign_o(sg), .zero_o(zr), .nar_o(nr), .sticky_o(st), .exp_o(ex), .frac_o(fr));
    posit_encode #(.N(N), .ES(ES), .F(F), .XW(XO)) u_enc (
      .sign(sg), .zero(zr), .nar(nr), .sticky(st), .exp(ex), .frac(fr), .p(vec[l]));
  end

  logic sg_s, zr_s, nr_s, st_s;
  logic [XO-1:0] ex_s;
  logic [F:0]    fr_s;
  pir_norm #(.MW(MWS), .IW(IWS), .XI(RXW), .XO(XO), .F(F)) u_norm_s (
    .sign_i(s_sign), .zero_i(s_zero), .nar_i(s_nar), .sticky_i(s_sticky),
    .exp_i(s_exp), .mant_i(s_mant),
    .sign_o(sg_s), .zero_o(zr_s), .nar_o(nr_s), .sticky_o(st_s), .exp_o(ex_s), .frac_o(fr_s));
  posit_encode #(.N(N), .ES(ES), .F(F), .XW(XO)) u_enc_s (
    .sign(sg_s), .zero(zr_s), .nar(nr_s), .sticky(st_s), .exp(ex_s), .frac(fr_s), .p(sca));

  always_comb begin
    if (sel_scalar) begin
      posit_rst    = '0;
      posit_rst[0] = sca;
    end else begin
      posit_rst = vec;
    end
  end
endmodule
