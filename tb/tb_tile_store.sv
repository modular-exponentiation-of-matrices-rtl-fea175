// tb_tile_store: test of T_20n^d (twenty containers) at default sizes.
// The store is filled the way memory words arrive, four rows side by side
// per clock (rows 4g..4g+3 for group g), with the groups interleaved at
// random. Then D activations must present vector v of every row on q[t]
// in order, and a second round must repeat them (recirculation). A final
// partial reload of one group must change only those four rows.
module tb_tile_store;
  import matmul_pkg::*;

  localparam int unsigned N   = N_DEF;
  localparam int unsigned D   = D_DEF;
  localparam int unsigned SZ  = TILE;
  localparam int unsigned VPW = VPW_DEF;

  logic clk = 1'b0;
  logic act = 1'b0;
  logic [SZ-1:0] ld_en = '0;
  logic [SZ-1:0][N-1:0][1:0] ld_vec, q;
  logic [N-1:0][1:0] f [SZ][D];
  int unsigned fill [SZ / VPW];
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  tile_store #(.N(N), .D(D), .SZ(SZ)) u_dut (.clk, .act, .ld_en, .ld_vec, .q);

  task automatic check_all(int unsigned v, string what);
    for (int t = 0; t < int'(SZ); t++) begin
      checks++;
      if (q[t] !== f[t][v]) begin
        failures++;
        if (failures < 5) $display("FAIL: %s: row %0d vector %0d", what, t, v);
      end
    end
  endtask

  initial begin
    ld_vec = '0;
    for (int t = 0; t < int'(SZ); t++)
      for (int v = 0; v < int'(D); v++)
        for (int e = 0; e < int'(N); e++) f[t][v][e] = 2'($urandom);
    foreach (fill[g]) fill[g] = 0;
    // load: one group per clock, chosen at random among unfinished ones
    for (int k = 0; k < int'(SZ / VPW * D); k++) begin
      int g;
      do g = $urandom_range(SZ / VPW - 1); while (fill[g] == D);
      ld_en = '0;
      for (int r = 0; r < int'(VPW); r++) begin
        ld_en[g*VPW + r]  = 1'b1;
        ld_vec[g*VPW + r] = f[g*VPW + r][fill[g]];
      end
      fill[g]++;
      @(posedge clk);
      #1;
    end
    ld_en = '0;
    for (int round = 0; round < 2; round++)
      for (int v = 0; v < int'(D); v++) begin
        check_all(v, "activation");
        act = 1'b1;
        @(posedge clk);
        #1;
        act = 1'b0;
      end
    // idle clocks keep the content
    repeat (3) @(posedge clk);
    #1;
    check_all(0, "hold");
    // reload group 2 only
    for (int v = 0; v < int'(D); v++) begin
      ld_en = '0;
      for (int r = 0; r < int'(VPW); r++) begin
        int t;
        t = 2*VPW + r;
        for (int e = 0; e < int'(N); e++) f[t][v][e] = 2'($urandom);
        ld_en[t]  = 1'b1;
        ld_vec[t] = f[t][v];
      end
      @(posedge clk);
      #1;
    end
    ld_en = '0;
    for (int v = 0; v < int'(D); v++) begin
      check_all(v, "after reload");
      act = 1'b1;
      @(posedge clk);
      #1;
      act = 1'b0;
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
