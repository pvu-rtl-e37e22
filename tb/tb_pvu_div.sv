// tb_pvu_div: checks the vector divide (results within one posit step of the correctly rounded quotient, at least 85% exact) unit for posit<32,2>, four lanes, on random
// operand vectors and on zero, NaR, maxpos and minpos. The unit sits between
// the vector decoder and the normalise/encode stage, and each encoded result
// is compared with the bit-serial reference model.
module tb_pvu_div;
  import posit_ref_pkg::*;
  localparam int N = 32, ES = 2, L = 4, F = 28, XW = 10, RXW = 12, MW = 56;
  logic [L-1:0][N-1:0] a, b, r;
  logic sub;
  wire unused_sub = sub;
  logic [L-1:0] as, az, an, bs, bz, bn, rs, rz, rn, rst;
  logic [L-1:0][XW-1:0] ae, be;
  logic [L-1:0][F-1:0] af, bf;
  logic [L-1:0][RXW-1:0] re;
  logic [L-1:0][MW-1:0] rm;
  int checks = 0, failures = 0, exact = 0;

  posit_to_pir #(.LANES(L)) u_dec (.pv1(a), .pv2(b),
    .a_sign(as), .a_zero(az), .a_nar(an), .a_exp(ae), .a_frac(af),
    .b_sign(bs), .b_zero(bz), .b_nar(bn), .b_exp(be), .b_frac(bf));
  pvu_div #(.LANES(L), .F(F), .XW(XW), .ITER(3)) dut (
    .a_sign(as), .a_zero(az), .a_nar(an), .a_exp(ae), .a_frac(af),
    .b_sign(bs), .b_zero(bz), .b_nar(bn), .b_exp(be), .b_frac(bf),
    .r_sign(rs), .r_zero(rz), .r_nar(rn), .r_sticky(rst), .r_exp(re), .r_mant(rm));
  pir_to_posit #(.LANES(L)) u_enc (.sel_scalar(1'b0),
    .v_sign(rs), .v_zero(rz), .v_nar(rn), .v_sticky(rst), .v_exp(re), .v_mant(rm),
    .s_sign(1'b0), .s_zero(1'b1), .s_nar(1'b0), .s_sticky(1'b0), .s_exp('0), .s_mant('0),
    .posit_rst(r));

  initial begin
    sub = 0;
    for (int t = 0; t < 3000; t++) begin
      for (int l = 0; l < L; l++) begin
        a[l] = rand_posit(N);
        b[l] = rand_posit(N);
      end
      sub = $urandom_range(0, 1);
      if (t == 0) begin
        a = {32'h7FFF_FFFF, 32'h0000_0001, 32'h8000_0000, 32'h0000_0000};
        b = {32'h7FFF_FFFF, 32'h0000_0001, 32'h4000_0000, 32'h4000_0000};
      end
      if (t == 1) begin
        a = {32'h4000_0000, 32'h4000_0000, 32'h0000_0000, 32'hC000_0000};
        b = {32'h4000_0000, 32'hC000_0000, 32'h0000_0000, 32'h0000_0010};
      end
      #1;
      for (int l = 0; l < L; l++) begin
        logic [31:0] e;
        int d;
        e = ref_div(a[l], b[l], N, ES);
        d = int'(r[l]) - int'(e);
        if (d < 0) d = -d;
        checks++;
        if (r[l] == e) exact++;
        if (d > 1) begin
          failures++;
          if (failures < 10) $display("FAIL a=%h b=%h got %h exp %h", a[l], b[l], r[l], e);
        end
      end
    end
    checks++;
    if (exact * 100 < checks * 85) begin failures++; $display("FAIL exact rate"); end
    $display("exact %0d of %0d", exact, checks - 1);
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
