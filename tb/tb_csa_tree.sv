// tb_csa_tree: checks the carry-save tree for 9 rows (the arrangement of
// the 16-bit Booth multiplier), 16 rows and 3 rows: sum + carry must equal
// the total of the rows modulo 2^W for random rows.
module tb_csa_tree;
  localparam int W = 40;
  logic [8:0][W-1:0]  in9;
  logic [15:0][W-1:0] in16;
  logic [2:0][W-1:0]  in3;
  logic [W-1:0] s9, c9, s16, c16, s3, c3;
  int checks = 0, failures = 0;

  csa_tree #(.NIN(9),  .W(W)) u9  (.in(in9),  .sum(s9),  .carry(c9));
  csa_tree #(.NIN(16), .W(W)) u16 (.in(in16), .sum(s16), .carry(c16));
  csa_tree #(.NIN(3),  .W(W)) u3  (.in(in3),  .sum(s3),  .carry(c3));

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [W-1:0] t9, t16, t3;
      t9 = '0; t16 = '0; t3 = '0;
      for (int i = 0; i < 16; i++) begin
        in16[i] = W'({$urandom, $urandom});
        t16 += in16[i];
        if (i < 9) begin in9[i] = W'({$urandom, $urandom}); t9 += in9[i]; end
        if (i < 3) begin in3[i] = W'({$urandom, $urandom}); t3 += in3[i]; end
      end
      #1;
      checks += 3;
      if (W'(s9 + c9) != t9)    begin failures++; $display("FAIL 9 rows"); end
      if (W'(s16 + c16) != t16) begin failures++; $display("FAIL 16 rows"); end
      if (W'(s3 + c3) != t3)    begin failures++; $display("FAIL 3 rows"); end
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
