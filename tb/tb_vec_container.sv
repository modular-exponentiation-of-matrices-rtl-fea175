// tb_vec_container: fill / drain / recirculate test of t_n^d at default
// sizes (n = 28, d = 32). After D loads the queue must present f_0..f_{D-1}
// in order, one per shift; with load low the content must come round again
// unchanged; it must hold while shift is low; partial reloads must push the
// oldest vectors out in queue order.
module tb_vec_container;
  import matmul_pkg::*;

  localparam int unsigned N = N_DEF;
  localparam int unsigned D = D_DEF;

  logic clk = 1'b0;
  logic shift = 1'b0, load = 1'b0;
  logic [N-1:0][1:0] d_in, q;
  logic [N-1:0][1:0] f [D];
  logic [N-1:0][1:0] model [$];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  vec_container #(.N(N), .D(D)) u_dut (.clk, .shift, .load, .d_in, .q);

  task automatic step(bit sh, bit ld, logic [N-1:0][1:0] x);
    shift = sh;
    load  = ld;
    d_in  = x;
    @(posedge clk);
    #1;
    if (sh) begin
      logic [N-1:0][1:0] head;
      head = model.pop_front();
      model.push_back(ld ? x : head);
    end
    shift = 1'b0;
    load  = 1'b0;
  endtask

  task automatic expect_head(string what);
    checks++;
    if (q !== model[0]) begin
      failures++;
      if (failures < 5) $display("FAIL: %s: head differs", what);
    end
  endtask

  initial begin
    for (int i = 0; i < int'(D); i++) model.push_back('0);
    d_in = '0;
    // fill with random vectors through the load path
    for (int i = 0; i < int'(D); i++) begin
      for (int e = 0; e < int'(N); e++) f[i][e] = 2'($urandom);
      step(1'b1, 1'b1, f[i]);
    end
    // drain with recirculation, twice round
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < int'(D); i++) begin
        checks++;
        if (q !== f[i]) begin
          failures++;
          if (failures < 5) $display("FAIL: round %0d activation %0d: wrong vector", r, i);
        end
        step(1'b1, 1'b0, '0);
      end
    // holds without shift
    repeat (5) step(1'b0, 1'b1, '1);
    expect_head("hold");
    // mixed random traffic against the queue model
    for (int t = 0; t < 300; t++) begin
      logic [N-1:0][1:0] x;
      for (int e = 0; e < int'(N); e++) x[e] = 2'($urandom);
      step(1'($urandom), 1'($urandom), x);
      expect_head("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
