// tb_booth_mul: checks the radix-4 Booth multiplier at 28x28 bits (the
// posit<32,2> mantissa size), 16x16 bits (nine Booth groups) and 28x33 bits:
// (sum + carry) mod 2^(WA+WB) must equal a*b, for random, all-ones and zero
// operands.
module tb_booth_mul;
  logic [27:0] a28, b28;
  logic [15:0] a16, b16;
  logic [32:0] b33;
  logic [57:0] s28, c28;
  logic [33:0] s16, c16;
  logic [62:0] s33, c33;
  int checks = 0, failures = 0;

  booth_mul #(.WA(28), .WB(28)) u28 (.a(a28), .b(b28), .sum(s28), .carry(c28));
  booth_mul #(.WA(16), .WB(16)) u16 (.a(a16), .b(b16), .sum(s16), .carry(c16));
  booth_mul #(.WA(28), .WB(33)) u33 (.a(a28), .b(b33), .sum(s33), .carry(c33));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [55:0] p28; logic [31:0] p16; logic [60:0] p33;
      a28 = 28'($urandom); b28 = 28'($urandom);
      a16 = 16'($urandom); b16 = 16'($urandom);
      b33 = 33'({$urandom, $urandom});
      if (t == 0) begin a28 = '1; b28 = '1; a16 = '1; b16 = '1; b33 = '1; end
      if (t == 1) begin a28 = '0; b16 = '0; end
      #1;
      p28 = 56'(s28 + c28); p16 = 32'(s16 + c16); p33 = 61'(s33 + c33);
      checks += 3;
      if (p28 != 56'(a28) * 56'(b28)) begin failures++; $display("FAIL 28 %h %h", a28, b28); end
      if (p16 != 32'(a16) * 32'(b16)) begin failures++; $display("FAIL 16 %h %h", a16, b16); end
      if (p33 != 61'(a28) * 61'(b33)) begin failures++; $display("FAIL 33 %h %h", a28, b33); end
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
