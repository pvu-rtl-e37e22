// tb_posit_to_pir: checks the vector decode stage (posit<32,2>, four lanes,
// both operands) lane by lane against the bit-serial reference decoder.
module tb_posit_to_pir;
  import posit_ref_pkg::*;
  localparam int L = 4;
  logic [L-1:0][31:0] a, b;
  logic [L-1:0] as, az, an, bs, bz, bn;
  logic [L-1:0][9:0] ae, be;
  logic [L-1:0][27:0] af, bf;
  int checks = 0, failures = 0;

  posit_to_pir #(.LANES(L)) dut (.pv1(a), .pv2(b),
    .a_sign(as), .a_zero(az), .a_nar(an), .a_exp(ae), .a_frac(af),
    .b_sign(bs), .b_zero(bz), .b_nar(bn), .b_exp(be), .b_frac(bf));

  function automatic bit same(ref_pir_t r, logic s, logic z, logic n, logic [9:0] e, logic [27:0] f);
    if (r.zero || r.nar) return (z == r.zero) && (n == r.nar);
    return !z && !n && s == r.sign && $signed(e) == r.scale && f == 28'(r.sig >> 5);
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int l = 0; l < L; l++) begin a[l] = rand_posit(32); b[l] = rand_posit(32); end
      if (t == 0) a = {32'h0, 32'h8000_0000, 32'h7FFF_FFFF, 32'h1};
      #1;
      for (int l = 0; l < L; l++) begin
        checks += 2;
        if (!same(ref_decode(a[l], 32, 2), as[l], az[l], an[l], ae[l], af[l])) begin
          failures++; $display("FAIL a lane %0d %h", l, a[l]);
        end
        if (!same(ref_decode(b[l], 32, 2), bs[l], bz[l], bn[l], be[l], bf[l])) begin
          failures++; $display("FAIL b lane %0d %h", l, b[l]);
        end
      end
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
