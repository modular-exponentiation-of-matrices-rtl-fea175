// tb_row_mult: random test of the row multiplier R (ten m chains sharing
// one row vector), default sizes. Each of the ten outputs is compared with
// s_in[j] + a . b[j] mod 4 computed here.
module tb_row_mult;
  import matmul_pkg::*;

  localparam int unsigned N    = N_DEF;
  localparam int unsigned COLS = SUB;

  logic [N-1:0][1:0]           a;
  logic [COLS-1:0][N-1:0][1:0] b;
  logic [COLS-1:0][1:0]        s_in, c;
  int unsigned                 checks = 0, failures = 0;

  row_mult #(.N(N), .COLS(COLS)) u_dut (.a, .b, .s_in, .c);

  initial begin
    for (int t = 0; t < 500; t++) begin
      a = '0;
      b = '0;
      for (int i = 0; i < int'(N); i++) a[i] = 2'($urandom);
      for (int j = 0; j < int'(COLS); j++) begin
        for (int i = 0; i < int'(N); i++) b[j][i] = 2'($urandom);
        s_in[j] = 2'($urandom);
      end
      #1;
      for (int j = 0; j < int'(COLS); j++) begin
        int acc;
        acc = int'(s_in[j]);
        for (int i = 0; i < int'(N); i++) acc += int'(a[i]) * int'(b[j][i]);
        checks++;
        if (int'(c[j]) != acc % 4) begin
          failures++;
          if (failures < 5) $display("FAIL: c[%0d] = %0d, expected %0d", j, c[j], acc % 4);
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
