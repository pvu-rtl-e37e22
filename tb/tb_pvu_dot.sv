// tb_pvu_dot: checks the dot-product unit for posit<32,2>, four lanes. The
// products come from the vector multiplier (as in the full unit), the
// scalar result goes through the scalar normalise/encode path, and it is
// compared with the exactly computed, correctly rounded dot product of the
// reference model. Random vectors, plus vectors with zero and NaR elements.
module tb_pvu_dot;
  import posit_ref_pkg::*;
  localparam int N = 32, ES = 2, L = 4, F = 28, XW = 10, RXW = 12, MW = 56;
  localparam int TW = 2 * F + 4 + 2 + 1;
  logic [L-1:0][N-1:0] a, b, r;
  logic [L-1:0] as, az, an, bs, bz, bn, ps, pz, pn, pst;
  logic [L-1:0][XW-1:0] ae, be;
  logic [L-1:0][F-1:0] af, bf;
  logic [L-1:0][RXW-1:0] pe;
  logic [L-1:0][MW-1:0] pm;
  logic ds, dz, dn, dst;
  logic [RXW-1:0] de;
  logic [TW-2:0] dm;
  int checks = 0, failures = 0;

  posit_to_pir #(.LANES(L)) u_dec (.pv1(a), .pv2(b),
    .a_sign(as), .a_zero(az), .a_nar(an), .a_exp(ae), .a_frac(af),
    .b_sign(bs), .b_zero(bz), .b_nar(bn), .b_exp(be), .b_frac(bf));
  pvu_mul #(.LANES(L)) u_mul (
    .a_sign(as), .a_zero(az), .a_nar(an), .a_exp(ae), .a_frac(af),
    .b_sign(bs), .b_zero(bz), .b_nar(bn), .b_exp(be), .b_frac(bf),
    .r_sign(ps), .r_zero(pz), .r_nar(pn), .r_sticky(pst), .r_exp(pe), .r_mant(pm));
  pvu_dot #(.LANES(L), .F(F), .RXW(RXW), .G(4)) dut (
    .p_sign(ps), .p_zero(pz), .p_nar(pn), .p_exp(pe), .p_mant(pm),
    .r_sign(ds), .r_zero(dz), .r_nar(dn), .r_sticky(dst), .r_exp(de), .r_mant(dm));
  pir_to_posit #(.LANES(L)) u_enc (.sel_scalar(1'b1),
    .v_sign('0), .v_zero('1), .v_nar('0), .v_sticky('0), .v_exp('0), .v_mant('0),
    .s_sign(ds), .s_zero(dz), .s_nar(dn), .s_sticky(dst), .s_exp(de), .s_mant(dm),
    .posit_rst(r));
  wire unused = ^pst;

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [15:0][31:0] a16, b16;
      logic [31:0] e;
      for (int l = 0; l < L; l++) begin
        a[l] = rand_posit(N);
        b[l] = rand_posit(N);
        if (t % 10 == 1) a[l] = 0;
      end
      if (t == 2) a[1] = 32'h8000_0000;
      a16 = '0; b16 = '0;
      for (int l = 0; l < L; l++) begin a16[l] = a[l]; b16[l] = b[l]; end
      #1;
      e = ref_dot(a16, b16, L, N, ES);
      checks++;
      if (r[0] != e) begin
        failures++;
        if (failures < 10) $display("FAIL got %h exp %h", r[0], e);
      end
      checks++;
      if (r[3:1] != '0) begin failures++; $display("FAIL upper lanes not zero"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
