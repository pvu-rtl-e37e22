// pvu_top: posit vector unit, LANES elements of posit<N,ES> per operation.
// Takes one custom vector instruction and its two operand vectors pv1, pv2
// per cycle and returns the result vector three cycles later:
//   stage 1  input register: operands, decoded operation, vd, legality
//   stage 2  Posit-PIR: every element is decoded (posit_to_pir), registered
//   stage 3  execute: add/sub, mul, div (per lane) and dot (all lanes, reusing
//            the mul products) run in parallel; the result selected by the
//            operation is registered
//   output   PIR-Posit: normalise and encode (pir_to_posit), combinational
//            from the stage-3 register
// The unit is fully pipelined: a new instruction may enter every cycle and
// there is no stall. out_valid follows in_valid by three clocks. A dot
// product returns its scalar in element 0 and zeros elsewhere. A word that is
// not a posit instruction travels with out_illegal set and a zero result.
// The register-field outputs (vs1, vs2) give the host core the registers to
// read; out_vd tags the result with its destination register.
// Synchronous active-low reset clears the valid bits only.
module pvu_top
  import pvu_pkg::*;
#(
  parameter int unsigned N     = 32,
  parameter int unsigned ES    = 2,
  parameter int unsigned LANES = 4,
  parameter int unsigned RGM_W = 8,
  parameter int unsigned G     = 4,
  parameter int unsigned ITER  = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [31:0]              insn,
  input  logic [LANES-1:0][N-1:0]  pv1,
  input  logic [LANES-1:0][N-1:0]  pv2,
  output logic [4:0]               dec_vs1,
  output logic [4:0]               dec_vs2,
  output logic                     out_valid,
  output logic                     out_illegal,
  output logic [4:0]               out_vd,
  output logic [LANES-1:0][N-1:0]  posit_rst
);
  localparam int unsigned F   = N - ES - 2;
  localparam int unsigned XW  = RGM_W + ES;
  localparam int unsigned RXW = XW + 2;
  localparam int unsigned MW  = 2 * F;
  localparam int unsigned TW  = 2 * F + G + $clog2(LANES) + 1;

  // ---------------- stage 1: instruction and operands
  logic       legal_d;
  pvu_op_e    op_d;
  logic [4:0] vd_d;

  pvu_insn_dec u_dec (.insn(insn), .legal(legal_d), .op(op_d),
                      .vs1(dec_vs1), .vs2(dec_vs2), .vd(vd_d));

  logic                    v1, ill1;
  pvu_op_e                 op1;
  logic [4:0]              vd1;
  logic [LANES-1:0][N-1:0] pv1_q, pv2_q;

  always_ff @(posedge clk) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
    op1   <= op_d;
    ill1  <= !legal_d;
    vd1   <= vd_d;
    pv1_q <= pv1;
    pv2_q <= pv2;
  end

  // ---------------- stage 2: Posit -> PIR
  logic [LANES-1:0]          a_sign, a_zero, a_nar, b_sign, b_zero, b_nar;
  logic [LANES-1:0][XW-1:0]  a_exp, b_exp;
  logic [LANES-1:0][F-1:0]   a_frac, b_frac;

  posit_to_pir #(.LANES(LANES), .N(N), .ES(ES), .RGM_W(RGM_W), .F(F), .XW(XW)) u_p2p (
    .pv1(pv1_q), .pv2(pv2_q),
    .a_sign(a_sign), .a_zero(a_zero), .a_nar(a_nar), .a_exp(a_exp), .a_frac(a_frac),
    .b_sign(b_sign), .b_zero(b_zero), .b_nar(b_nar), .b_exp(b_exp), .b_frac(b_frac));

  logic                      v2, ill2;
  pvu_op_e                   op2;
  logic [4:0]                vd2;
  logic [LANES-1:0]          as2, az2, an2, bs2, bz2, bn2;
  logic [LANES-1:0][XW-1:0]  ae2, be2;
  logic [LANES-1:0][F-1:0]   af2, bf2;

  always_ff @(posedge clk) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
    op2 <= op1;  ill2 <= ill1;  vd2 <= vd1;
    as2 <= a_sign; az2 <= a_zero; an2 <= a_nar; ae2 <= a_exp; af2 <= a_frac;
    bs2 <= b_sign; bz2 <= b_zero; bn2 <= b_nar; be2 <= b_exp; bf2 <= b_frac;
  end

  // ---------------- stage 3: arithmetic units
  logic [LANES-1:0]          add_s, add_z, add_n, add_st;
  logic [LANES-1:0][RXW-1:0] add_e;
  logic [LANES-1:0][MW-1:0]  add_m;
  logic [LANES-1:0]          mul_s, mul_z, mul_n, mul_st;
  logic [LANES-1:0][RXW-1:0] mul_e;
  logic [LANES-1:0][MW-1:0]  mul_m;
  logic [LANES-1:0]          div_s, div_z, div_n, div_st;
  logic [LANES-1:0][RXW-1:0] div_e;
  logic [LANES-1:0][MW-1:0]  div_m;
  logic                      dot_s, dot_z, dot_n, dot_st;
  logic [RXW-1:0]            dot_e;
  logic [TW-2:0]             dot_m;

  pvu_addsub #(.LANES(LANES), .F(F), .XW(XW), .G(G), .MW(MW), .RXW(RXW)) u_add (
    .sub(op2 == OP_SUB),
    .a_sign(as2), .a_zero(az2), .a_nar(an2), .a_exp(ae2), .a_frac(af2),
    .b_sign(bs2), .b_zero(bz2), .b_nar(bn2), .b_exp(be2), .b_frac(bf2),
    .r_sign(add_s), .r_zero(add_z), .r_nar(add_n), .r_sticky(add_st),
    .r_exp(add_e), .r_mant(add_m));

  pvu_mul #(.LANES(LANES), .N(N), .ES(ES), .F(F), .XW(XW), .MW(MW), .RXW(RXW)) u_mul (
    .a_sign(as2), .a_zero(az2), .a_nar(an2), .a_exp(ae2), .a_frac(af2),
    .b_sign(bs2), .b_zero(bz2), .b_nar(bn2), .b_exp(be2), .b_frac(bf2),
    .r_sign(mul_s), .r_zero(mul_z), .r_nar(mul_n), .r_sticky(mul_st),
    .r_exp(mul_e), .r_mant(mul_m));

  pvu_div #(.LANES(LANES), .F(F), .XW(XW), .ITER(ITER), .MW(MW), .RXW(RXW)) u_div (
    .a_sign(as2), .a_zero(az2), .a_nar(an2), .a_exp(ae2), .a_frac(af2),
    .b_sign(bs2), .b_zero(bz2), .b_nar(bn2), .b_exp(be2), .b_frac(bf2),
    .r_sign(div_s), .r_zero(div_z), .r_nar(div_n), .r_sticky(div_st),
    .r_exp(div_e), .r_mant(div_m));

  // the dot product reuses the multiplier's exact products
  pvu_dot #(.LANES(LANES), .F(F), .RXW(RXW), .G(G), .TW(TW)) u_dot (
    .p_sign(mul_s), .p_zero(mul_z), .p_nar(mul_n), .p_exp(mul_e), .p_mant(mul_m),
    .r_sign(dot_s), .r_zero(dot_z), .r_nar(dot_n), .r_sticky(dot_st),
    .r_exp(dot_e), .r_mant(dot_m));

  logic                      v3, ill3, dot3;
  logic [4:0]                vd3;
  logic [LANES-1:0]          rs3, rz3, rn3, rst3;
  logic [LANES-1:0][RXW-1:0] re3;
  logic [LANES-1:0][MW-1:0]  rm3;
  logic                      ss3, sz3, sn3, sst3;
  logic [RXW-1:0]            se3;
  logic [TW-2:0]             sm3;

  always_ff @(posedge clk) begin
    if (!rst_n) v3 <= 1'b0;
    else        v3 <= v2;
    ill3 <= ill2;
    vd3  <= vd2;
    dot3 <= (op2 == OP_DOT);
    unique case (op2)
      OP_MUL, OP_DOT: begin
        rs3 <= mul_s; rz3 <= mul_z; rn3 <= mul_n; rst3 <= mul_st; re3 <= mul_e; rm3 <= mul_m;
      end
      OP_DIV: begin
        rs3 <= div_s; rz3 <= div_z; rn3 <= div_n; rst3 <= div_st; re3 <= div_e; rm3 <= div_m;
      end
      default: begin
        rs3 <= add_s; rz3 <= add_z; rn3 <= add_n; rst3 <= add_st; re3 <= add_e; rm3 <= add_m;
      end
    endcase
    ss3 <= dot_s; sz3 <= dot_z; sn3 <= dot_n; sst3 <= dot_st; se3 <= dot_e; sm3 <= dot_m;
  end

  // ---------------- PIR -> Posit
  logic [LANES-1:0][N-1:0] enc;

  pir_to_posit #(.LANES(LANES), .N(N), .ES(ES), .F(F), .RXW(RXW), .MW(MW),
                 .MWS(TW-1), .IWS(2 + $clog2(LANES))) u_enc (
    .sel_scalar(dot3),
    .v_sign(rs3), .v_zero(rz3), .v_nar(rn3), .v_sticky(rst3), .v_exp(re3), .v_mant(rm3),
    .s_sign(ss3), .s_zero(sz3), .s_nar(sn3), .s_sticky(sst3), .s_exp(se3), .s_mant(sm3),
    .posit_rst(enc));

  assign out_valid   = v3;
  assign out_illegal = ill3;
  assign out_vd      = vd3;
  assign posit_rst   = ill3 ? '0 : enc;
endmodule
