// tb_posit_decode: checks the posit decoder for posit<32,2> on random words
// and on zero, NaR, maxpos and minpos against the bit-serial reference, and
// for posit<16,2> on the worked example 0111110111101010 (regime 111110 so
// r = 4, e = 3, f = 106/128: exp = 19, mantissa 1.828125) plus random words.
module tb_posit_decode;
  import posit_ref_pkg::*;
  logic [31:0] p32;
  logic [15:0] p16;
  logic z32, n32, s32, z16, n16, s16;
  logic [9:0] e32;
  logic [9:0] e16;
  logic [27:0] f32;
  logic [11:0] f16;
  int checks = 0, failures = 0;

  posit_decode #(.N(32), .ES(2), .RGM_W(8)) u32 (.p(p32), .zero(z32), .nar(n32), .sign(s32), .exp(e32), .frac(f32));
  posit_decode #(.N(16), .ES(2), .RGM_W(8)) u16 (.p(p16), .zero(z16), .nar(n16), .sign(s16), .exp(e16), .frac(f16));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s p32=%h p16=%h", what, p32, p16); end
  endtask

  initial begin
    p16 = 16'b0111110111101010; p32 = 0;
    #1;
    chk(!s16 && !z16 && !n16, "example flags");
    chk($signed(e16) == 19, "example exp");
    chk(f16 == 12'b1110_1010_0000, "example frac");
    for (int t = 0; t < 4000; t++) begin
      ref_pir_t r;
      p32 = rand_posit(32);
      p16 = 16'(rand_posit(16));
      case (t)
        0: p32 = 0; 1: p32 = 32'h8000_0000; 2: p32 = 32'h7FFF_FFFF; 3: p32 = 32'h0000_0001;
        4: p32 = 32'hFFFF_FFFF; default: ;
      endcase
      #1;
      r = ref_decode(p32, 32, 2);
      chk(z32 == r.zero && n32 == r.nar, "flags32");
      if (!r.zero && !r.nar) begin
        chk(s32 == r.sign, "sign32");
        chk($signed(e32) == r.scale, "exp32");
        chk(f32 == 28'(r.sig >> 5), "frac32");
      end
      r = ref_decode(32'(p16), 16, 2);
      chk(z16 == r.zero && n16 == r.nar, "flags16");
      if (!r.zero && !r.nar) begin
        chk(s16 == r.sign && $signed(e16) == r.scale, "sign/exp16");
        chk(f16 == 12'(r.sig >> 21), "frac16");
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
