// tb_ma_lut: exhaustive test of the MA unit L(a,b,s).
// All 64 input combinations are applied and c is compared with
// (a*b + s) mod 4 computed by integer arithmetic here.
module tb_ma_lut;
  import matmul_pkg::*;

  z4_t a, b, s, c;
  int unsigned checks = 0, failures = 0;

  ma_lut u_dut (.a, .b, .s, .c);

  initial begin
    for (int x = 0; x < 64; x++) begin
      a = z4_t'(x >> 4);
      b = z4_t'(x >> 2);
      s = z4_t'(x);
      #1;
      checks++;
      if (int'(c) != ((int'(a) * int'(b) + int'(s)) % 4)) begin
        failures++;
        $display("FAIL: L(%0d,%0d,%0d) = %0d", a, b, s, c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
