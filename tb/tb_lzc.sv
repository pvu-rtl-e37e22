// tb_lzc: checks the leading zero counter on a 37-bit word against a count
// made by scanning from the MSB: random words with a random number of
// leading zeros, and the all-zero word (count 37, flag set).
module tb_lzc;
  localparam int W = 37, CW = $clog2(W + 1);
  logic [W-1:0] in;
  logic [CW-1:0] cnt;
  logic all_zero;
  int checks = 0, failures = 0;

  lzc #(.W(W)) dut (.in, .cnt, .all_zero);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int exp_cnt;
      in = {$urandom, $urandom};
      in = in >> $urandom_range(0, W);
      if (t == 0) in = '0;
      #1;
      exp_cnt = 0;
      while (exp_cnt < W && !in[W-1-exp_cnt]) exp_cnt++;
      checks++;
      if (cnt != CW'(exp_cnt) || all_zero != (exp_cnt == W)) begin
        failures++;
        $display("FAIL in=%h cnt=%0d exp=%0d", in, cnt, exp_cnt);
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
