// tb_test_data_gen: the generator must emit the sequence
// D_i = D_{i-1} + D_{i-2} + 2 D_{i-4} + D_{i-5} mod 4, D_0..D_3 = 0, D_4 = 1,
// 2N terms per enabled clock, starting at D_5 (u first, then v). The
// reference sequence is computed here term by term; the enable is toggled
// at random to check that the generator holds while disabled.
module tb_test_data_gen;
  import matmul_pkg::*;

  localparam int unsigned N = N_DEF;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0;
  logic [N-1:0][1:0] u, v;
  localparam int LEN = 5 + 2 * int'(N) * 200;
  int ref_seq [LEN];
  int pos;
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  test_data_gen #(.N(N)) u_dut (.clk, .rst_n, .en, .u, .v);

  initial begin
    for (int i = 0; i < 4; i++) ref_seq[i] = 0;
    ref_seq[4] = 1;
    for (int i = 5; i < LEN; i++)
      ref_seq[i] = (ref_seq[i-1] + ref_seq[i-2] + 2 * ref_seq[i-4] + ref_seq[i-5]) % 4;
    pos = 5;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      for (int e = 0; e < int'(N); e++) begin
        checks++;
        if (int'(u[e]) != ref_seq[pos + e] || int'(v[e]) != ref_seq[pos + int'(N) + e]) begin
          failures++;
          if (failures < 5) $display("FAIL: step %0d element %0d", t, e);
        end
      end
      en = 1'($urandom);
      @(posedge clk);
      #1;
      if (en) pos += 2 * int'(N);
      if (pos + 2 * int'(N) > LEN) break;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
