// tb_dot_mult: random and corner-case test of the dot-product chain m
// at its default length n = 28. Each result is compared with
// s_in + sum u[i]*v[i] mod 4 computed here with integers.
module tb_dot_mult;
  import matmul_pkg::*;

  localparam int unsigned N = N_DEF;

  logic [N-1:0][1:0] u, v;
  z4_t               s_in, w;
  int unsigned       checks = 0, failures = 0;

  dot_mult #(.N(N)) u_dut (.u, .v, .s_in, .w);

  task automatic apply();
    int acc;
    #1;
    acc = int'(s_in);
    for (int i = 0; i < int'(N); i++) acc += int'(u[i]) * int'(v[i]);
    checks++;
    if (int'(w) != acc % 4) begin
      failures++;
      $display("FAIL: w = %0d, expected %0d", w, acc % 4);
    end
  endtask

  initial begin
    u = '1; v = '1; s_in = 2'd3; apply();       // all threes
    u = '0; v = '1; s_in = 2'd2; apply();       // only the sum input
    for (int k = 0; k < int'(N); k++) begin     // one element at a time
      u = '0; v = '0; u[k] = 2'd3; v[k] = 2'd3; s_in = 2'd0; apply();
    end
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < int'(N); i++) begin
        u[i] = 2'($urandom);
        v[i] = 2'($urandom);
      end
      s_in = 2'($urandom);
      apply();
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
