// tb_mult_10x10: random test of M10x10 at default sizes. All 100 outputs
// c[r][j] are compared with s_in[r][j] + a[r] . b[j] mod 4 computed here.
module tb_mult_10x10;
  import matmul_pkg::*;

  localparam int unsigned N  = N_DEF;
  localparam int unsigned SZ = SUB;

  logic [SZ-1:0][N-1:0][1:0]  a, b;
  logic [SZ-1:0][SZ-1:0][1:0] s_in, c;
  int unsigned                checks = 0, failures = 0;

  mult_10x10 #(.N(N), .SZ(SZ)) u_dut (.a, .b, .s_in, .c);

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int r = 0; r < int'(SZ); r++)
        for (int i = 0; i < int'(N); i++) begin
          a[r][i] = 2'($urandom);
          b[r][i] = 2'($urandom);
        end
      for (int r = 0; r < int'(SZ); r++)
        for (int j = 0; j < int'(SZ); j++) s_in[r][j] = 2'($urandom);
      #1;
      for (int r = 0; r < int'(SZ); r++)
        for (int j = 0; j < int'(SZ); j++) begin
          int acc;
          acc = int'(s_in[r][j]);
          for (int i = 0; i < int'(N); i++) acc += int'(a[r][i]) * int'(b[j][i]);
          checks++;
          if (int'(c[r][j]) != acc % 4) begin
            failures++;
            if (failures < 5) $display("FAIL: c[%0d][%0d] = %0d, expected %0d", r, j, c[r][j], acc % 4);
          end
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
