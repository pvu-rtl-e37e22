// tb_posit_encode: checks the posit<32,2> encoder on random normalised
// inputs (sign, exponent from -135 to 135, so saturation to maxpos and
// minpos occurs, 29-bit mantissa, sticky) against the bit-serial reference
// encoder with round to nearest even, plus zero and NaR inputs. A posit<16,2>
// instance is checked the same way.
module tb_posit_encode;
  import posit_ref_pkg::*;
  logic s, z, n, st;
  logic [12:0] e;
  logic [28:0] f32;
  logic [12:0] f16;
  logic [31:0] p32;
  logic [15:0] p16;
  int checks = 0, failures = 0, nsat = 0;

  posit_encode #(.N(32), .ES(2), .XW(13)) u32 (.sign(s), .zero(z), .nar(n), .sticky(st), .exp(e), .frac(f32), .p(p32));
  posit_encode #(.N(16), .ES(2), .XW(13)) u16 (.sign(s), .zero(z), .nar(n), .sticky(st), .exp(e), .frac(f16), .p(p16));

  initial begin
    for (int t = 0; t < 4000; t++) begin
      logic [31:0] r32, r16;
      s = 1'($urandom); z = (t % 97 == 5); n = (t % 89 == 7); st = 1'($urandom);
      e = 13'($urandom_range(0, 270) - 135);
      f32 = {1'b1, 28'($urandom)};
      f16 = {1'b1, 12'($urandom)};
      #1;
      if (n) begin r32 = 32'h8000_0000; r16 = 32'h8000; end
      else if (z) begin r32 = 0; r16 = 0; end
      else begin
        r32 = ref_encode(s, big_t'(f32), $signed(e) - 28, st, 32, 2);
        r16 = ref_encode(s, big_t'(f16), $signed(e) - 12, st, 16, 2);
      end
      if (r32 == 32'h7FFF_FFFF || r32 == 32'h1 || r32 == 32'h8000_0001 || r32 == 32'hFFFF_FFFF) nsat++;
      checks += 2;
      if (p32 != r32) begin failures++; if (failures < 10) $display("FAIL32 e=%0d f=%h got %h exp %h", $signed(e), f32, p32, r32); end
      if (32'(p16) != r16) begin failures++; if (failures < 10) $display("FAIL16 e=%0d f=%h got %h exp %h", $signed(e), f16, p16, r16); end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL no saturation case"); end
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
