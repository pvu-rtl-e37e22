// tb_bsc: checks the barrel shifter, a left and a right instance of 32 bits,
// against the shift operators for every amount from 0 to 33, including the
// sticky output (OR of the bits shifted out).
module tb_bsc;
  localparam int W = 32, SW = 6;
  logic [W-1:0] in, outl, outr;
  logic [SW-1:0] sh;
  logic stl, str;
  int checks = 0, failures = 0;

  bsc #(.W(W), .SW(SW), .LEFT(1'b1)) u_l (.in, .sh, .out(outl), .sticky(stl));
  bsc #(.W(W), .SW(SW), .LEFT(1'b0)) u_r (.in, .sh, .out(outr), .sticky(str));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [3*W-1:0] wl, wr;
      in = $urandom;
      if (t % 7 == 0) in = in >> $urandom_range(0, 31);
      sh = SW'($urandom_range(0, W + 1));
      #1;
      wl = {{(2*W){1'b0}}, in} << sh;
      wr = {in, {(2*W){1'b0}}} >> sh;
      checks += 2;
      if (outl != wl[W-1:0] || stl != (|wl[3*W-1:W])) begin
        failures++; $display("FAIL left in=%h sh=%0d", in, sh);
      end
      if (outr != wr[3*W-1:2*W] || str != (|wr[2*W-1:0])) begin
        failures++; $display("FAIL right in=%h sh=%0d", in, sh);
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
