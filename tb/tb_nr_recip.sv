// tb_nr_recip: checks the Newton reciprocal for 28-bit mantissas (32
// fraction bits out, three steps): for random d in [1,2) and the ends
// d = 1 and d = 2 - 2^-27, x must lie within -2..+8 units of 2^-32 below the
// exact 1/d (Newton approaches from below; truncation may overshoot by an LSB).
module tb_nr_recip;
  localparam int F = 28, RW = 32;
  logic [F-1:0] d;
  logic [RW:0] x;
  int checks = 0, failures = 0;

  nr_recip #(.F(F), .RW(RW), .ITER(3)) dut (.d, .x);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [127:0] exact;
      longint err;
      d = {1'b1, 27'($urandom)};
      if (t == 0) d = {1'b1, 27'd0};
      if (t == 1) d = '1;
      #1;
      exact = (128'd1 << (RW + F - 1)) / 128'(d);
      err = longint'(exact) - longint'(x);
      checks++;
      if (err < -2 || err > 8) begin
        failures++;
        if (failures < 10) $display("FAIL d=%h x=%h exact=%h", d, x, exact);
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
