// tb_timing_tester: the Subject/Examiner schedule at the default chain
// length. The testbench rebuilds the questions from the recurrence and
// checks that, in every enabled clock, the Subject answers the question
// issued nine enabled clocks earlier (the one Examiner E_p holds) and that
// the tester reports that many comparisons and no error. The enable is
// toggled at random.
module tb_timing_tester;
  import matmul_pkg::*;

  localparam int unsigned N = N_DEF;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic en = 1'b0;
  logic err;
  logic [31:0] n_checks, n_errors;
  localparam int LEN = 5 + 2 * int'(N) * 400;
  int ref_seq [LEN];
  int steps = 0;
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  timing_tester #(.N(N)) u_dut (.clk, .rst_n, .en, .err, .n_checks, .n_errors);

  // answer to question number t (0 = first after reset); before that, zero
  function automatic int answer(int t);
    int acc;
    if (t < 0) return 0;
    acc = 0;
    for (int e = 0; e < int'(N); e++)
      acc += ref_seq[5 + t*2*int'(N) + e] * ref_seq[5 + t*2*int'(N) + int'(N) + e];
    return acc % 4;
  endfunction

  initial begin
    for (int i = 0; i < 4; i++) ref_seq[i] = 0;
    ref_seq[4] = 1;
    for (int i = 5; i < LEN; i++)
      ref_seq[i] = (ref_seq[i-1] + ref_seq[i-2] + 2 * ref_seq[i-4] + ref_seq[i-5]) % 4;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 500 && steps < 390; t++) begin
      en = 1'($urandom);
      if (en) begin
        checks++;
        if (int'(u_dut.s_out) != answer(steps - 9)) begin
          failures++;
          if (failures < 5) $display("FAIL: step %0d: subject answered %0d, expected %0d",
                                     steps, u_dut.s_out, answer(steps - 9));
        end
      end
      @(posedge clk);
      #1;
      if (en) steps++;
    end
    en = 1'b0;
    checks++;
    if (n_checks != 32'(steps) || n_errors != 0 || err) begin
      failures++;
      $display("FAIL: tester reports %0d checks, %0d errors (expected %0d, 0)", n_checks, n_errors, steps);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
