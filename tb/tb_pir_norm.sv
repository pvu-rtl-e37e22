// tb_pir_norm: checks the normaliser with a 56-bit mantissa of two integer
// bits and 28-bit output mantissa: the leading one must land on the top
// output bit, the exponent must move by the shift, the 29 kept bits must be
// the ones after the leading one and the sticky the OR of all bits below
// them and the input sticky. A zero mantissa must give zero.
module tb_pir_norm;
  localparam int MW = 56, IW = 2, XI = 12, XO = 13, F = 28;
  logic si, zi, ni, sti, so, zo, no, sto;
  logic [XI-1:0] ei;
  logic [MW-1:0] mi;
  logic signed [XO-1:0] eo;
  logic [F:0] fo;
  int checks = 0, failures = 0;

  pir_norm #(.MW(MW), .IW(IW), .XI(XI), .XO(XO), .F(F)) dut (
    .sign_i(si), .zero_i(zi), .nar_i(ni), .sticky_i(sti), .exp_i(ei), .mant_i(mi),
    .sign_o(so), .zero_o(zo), .nar_o(no), .sticky_o(sto), .exp_o(eo), .frac_o(fo));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int msb;
      logic [127:0] w;
      logic [F:0] ef;
      bit es;
      si = 1'($urandom); zi = 0; ni = 0; sti = ($urandom_range(0, 3) == 0);
      ei = XI'($urandom_range(0, 400) - 200);
      mi = MW'({$urandom, $urandom}) >> $urandom_range(0, MW);
      #1;
      checks++;
      if (mi == 0) begin
        if (!zo || so) begin failures++; $display("FAIL zero"); end
        continue;
      end
      msb = 0;
      for (int i = 0; i < MW; i++) if (mi[i]) msb = i;
      w = 128'(mi) << (127 - msb);
      ef = w[127 -: F+1];
      es = sti | (|w[127-F-1:0]);
      if (zo || so != si || int'(eo) != $signed(ei) + msb - (MW - IW) || fo != ef || sto != es) begin
        failures++;
        $display("FAIL m=%h e=%0d got e=%0d f=%h st=%0d", mi, $signed(ei), eo, fo, sto);
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
