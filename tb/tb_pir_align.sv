// tb_pir_align: checks the aligner with four 8-bit mantissas widened to 12
// bits: the largest exponent among the non-zero elements is the target, each
// mantissa is shifted right by its distance (clamped to the 12-bit width),
// and any bit shifted out sets the LSB. Zero elements are ignored and give 0.
module tb_pir_align;
  localparam int NUM = 4, XW = 8, WI = 8, WO = 12;
  logic [NUM-1:0] zero;
  logic [NUM-1:0][XW-1:0] exp;
  logic [NUM-1:0][WI-1:0] mant;
  logic signed [XW-1:0] emax;
  logic [NUM-1:0][WO-1:0] aligned;
  int checks = 0, failures = 0;

  pir_align #(.NUM(NUM), .XW(XW), .WI(WI), .WO(WO)) dut (.zero, .exp, .mant, .emax, .aligned);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int em, d;
      bit any;
      logic [63:0] full;
      for (int i = 0; i < NUM; i++) begin
        zero[i] = ($urandom_range(0, 5) == 0);
        exp[i]  = XW'($signed($urandom_range(0, 40)) - 20);
        mant[i] = {1'b1, 7'($urandom)};
      end
      #1;
      any = 0; em = 0;
      for (int i = 0; i < NUM; i++)
        if (!zero[i] && (!any || $signed(exp[i]) > em)) begin em = $signed(exp[i]); any = 1; end
      checks++;
      if (int'(emax) != em) begin failures++; $display("FAIL emax %0d exp %0d", emax, em); end
      for (int i = 0; i < NUM; i++) begin
        logic [WO-1:0] e;
        if (zero[i]) e = '0;
        else begin
          d = em - $signed(exp[i]);
          full = (64'({mant[i], {(WO - WI){1'b0}}}) << (64 - WO)) >> d;
          e = full[63 -: WO] | WO'(|full[63-WO:0]);
        end
        checks++;
        if (aligned[i] != e) begin failures++; $display("FAIL el %0d got %h exp %h", i, aligned[i], e); end
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
