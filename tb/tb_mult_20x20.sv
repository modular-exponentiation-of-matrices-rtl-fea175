// tb_mult_20x20: iterated multiplication on M20x20 at default sizes.
// Twenty rows of A and twenty columns of B of length n*D are fed n
// elements per clock for D clocks (first set on the first clock), as the
// containers do; the accumulated tile must then equal A x B mod 4 computed
// here, one clock after the last activation, and must hold while en is low.
// Three iterations are run back to back, the second one with a gap.
module tb_mult_20x20;
  import matmul_pkg::*;

  localparam int unsigned N  = N_DEF;
  localparam int unsigned SZ = TILE;
  localparam int unsigned D  = 6;           // iterations of the feedback loop

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0, first = 1'b0;
  logic [SZ-1:0][N-1:0][1:0]  a, b;
  logic [SZ-1:0][SZ-1:0][1:0] c;
  logic [1:0] am [SZ][N*D];
  logic [1:0] bm [SZ][N*D];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  mult_20x20 #(.N(N), .SZ(SZ)) u_dut (.clk, .rst_n, .en, .first, .a, .b, .c);

  task automatic iteration(bit gap);
    for (int r = 0; r < int'(SZ); r++)
      for (int x = 0; x < int'(N * D); x++) begin
        am[r][x] = 2'($urandom);
        bm[r][x] = 2'($urandom);
      end
    for (int step = 0; step < int'(D); step++) begin
      for (int r = 0; r < int'(SZ); r++)
        for (int i = 0; i < int'(N); i++) begin
          a[r][i] = am[r][step*N + i];
          b[r][i] = bm[r][step*N + i];
        end
      en    = 1'b1;
      first = (step == 0);
      @(posedge clk);
      #1;
      if (gap && step == 2) begin
        en = 1'b0;
        a  = '1;
        b  = '1;
        repeat (3) @(posedge clk);
        #1;
      end
    end
    en = 1'b0;
    a  = '1;
    b  = '1;
    repeat (2) @(posedge clk);
    #1;
    for (int r = 0; r < int'(SZ); r++)
      for (int j = 0; j < int'(SZ); j++) begin
        int acc;
        acc = 0;
        for (int x = 0; x < int'(N * D); x++) acc += int'(am[r][x]) * int'(bm[j][x]);
        checks++;
        if (int'(c[r][j]) != acc % 4) begin
          failures++;
          if (failures < 5) $display("FAIL: c[%0d][%0d] = %0d, expected %0d", r, j, c[r][j], acc % 4);
        end
      end
  endtask

  initial begin
    a = '0;
    b = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    iteration(1'b0);
    iteration(1'b1);
    iteration(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
