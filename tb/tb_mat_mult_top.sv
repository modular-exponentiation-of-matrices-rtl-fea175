// tb_mat_mult_top: end-to-end test of mat_mult_top, at reduced size (n = 8, d = 25, k = 200,
// kappa = 10, z = 3).
//
// The testbench plays the host: it makes random matrices A and B over Z_4
// of size k = N*D (padded with zeros to 20*KAPPA), writes them into the
// memory model in the tile layout (A by rows, B by columns), starts the
// multiplier and compares every 20x20 tile of C in memory with C = A x B
// mod 4 computed here element by element.
//
// Run 1 has a memory that never stalls. Where one phase's memory traffic
// fits in the cycles the phase computes (true at the default sizes), the
// 20x20 multiplier must then be busy every cycle from its first activation
// to its last: the computation takes exactly d*kappa^2 cycles and all
// loading and writing is hidden behind it. Run 2 makes the memory drop its
// ready signals at random and blocks its write-data channel for 3*d cycles
// in every 10*d, and checks that the result is still right and that the controller
// stalled. Both runs count the mechanisms of the schedule (load stalls,
// write-back stalls, row-store swaps, wrap-around of the row-tile index,
// self-test comparisons) and fail on one that never happened.
module tb_mat_mult_top;
  import matmul_pkg::*;

  localparam int unsigned N     = 8;
  localparam int unsigned D     = 25;
  localparam int unsigned Z     = 3;
  localparam int unsigned KAPPA = kappa_of(N, D);
  localparam int unsigned VPW   = 4;

  localparam int unsigned K      = N * D;
  localparam int unsigned KP     = TILE * KAPPA;
  localparam int unsigned GPT    = TILE / VPW;
  localparam int unsigned WPT    = GPT * D;
  localparam int unsigned PPS    = KAPPA / (Z - 1);
  localparam int unsigned NPHASE = KAPPA * PPS;
  localparam int unsigned GPR    = TILE / PPS / VPW;
  localparam int unsigned CWORDS = (TILE * TILE * 2 + MEM_W - 1) / MEM_W;
  localparam int unsigned A_BASE = 0;
  localparam int unsigned B_BASE = KAPPA * WPT;
  localparam int unsigned C_BASE = 2 * KAPPA * WPT;
  localparam int unsigned WORDS  = C_BASE + KAPPA * KAPPA * CWORDS;
  localparam longint unsigned GAMMA = longint'(D) * KAPPA * KAPPA;
  // Memory words one phase needs against the cycles it computes: the next
  // column tile, the next rows and the write-back of Z-1 tiles.
  localparam int unsigned PHASE_WORDS = WPT + GPR * D + (Z - 1) * CWORDS;
  localparam bit          HIDDEN      = (Z - 1) * D >= PHASE_WORDS;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  logic selftest_en = 1'b0;
  always #5 clk = ~clk;

  logic               busy, done;
  logic               cmd_valid, cmd_ready, wdf_valid, wdf_ready, rd_valid;
  mem_cmd_t           cmd;
  logic [MEM_W-1:0]   wdf_data, rd_data;
  logic [MEM_W/8-1:0] wdf_mask;
  logic               selftest_err;
  logic [31:0]        selftest_checks, selftest_errors;
  logic [31:0]        n_act, n_stall_load, n_stall_wb, n_row_swaps, n_wraps;
  logic [31:0]        n_rd_words, n_wr_words;

  ddr_model #(.WORDS(WORDS), .LAT(20)) u_mem (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .wdf_valid, .wdf_ready,
    .wdf_data, .wdf_mask, .rd_valid, .rd_data
  );

  mat_mult_top #(.N(N), .D(D), .Z(Z), .KAPPA(KAPPA), .VPW(VPW)) u_dut (
    .clk, .rst_n, .start,
    .a_base (ADDR_W'(A_BASE)), .b_base (ADDR_W'(B_BASE)), .c_base (ADDR_W'(C_BASE)),
    .busy, .done,
    .cmd_valid, .cmd_ready, .cmd, .wdf_valid, .wdf_ready, .wdf_data, .wdf_mask,
    .rd_valid, .rd_data,
    .selftest_en, .selftest_err, .selftest_checks, .selftest_errors,
    .n_act, .n_stall_load, .n_stall_wb, .n_row_swaps, .n_wraps,
    .n_rd_words, .n_wr_words
  );

  logic [1:0] A [KP][KP];
  logic [1:0] B [KP][KP];
  logic [1:0] C [KP][KP];

  int unsigned checks = 0, failures = 0;
  int unsigned ev_stall_load = 0, ev_stall_wb = 0, ev_swaps = 0, ev_wraps = 0, ev_selftest = 0;
  longint unsigned cyc = 0;
  longint unsigned first_act_cyc, last_act_cyc;
  logic [31:0] prev_act;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    prev_act <= n_act;
    if (rst_n && busy && n_act == 1 && prev_act == 0) first_act_cyc = cyc;
    if (rst_n && busy && n_act != prev_act) last_act_cyc = cyc;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic make_matrices(int unsigned seed);
    void'($urandom(seed));
    for (int i = 0; i < int'(KP); i++)
      for (int j = 0; j < int'(KP); j++) begin
        A[i][j] = (i < int'(K) && j < int'(K)) ? 2'($urandom) : 2'd0;
        B[i][j] = (i < int'(K) && j < int'(K)) ? 2'($urandom) : 2'd0;
      end
    for (int i = 0; i < int'(KP); i++)
      for (int j = 0; j < int'(KP); j++) begin
        logic [1:0] s;
        s = 2'd0;
        for (int x = 0; x < int'(K); x++) s = s + A[i][x] * B[x][j];
        C[i][j] = s;
      end
  endtask

  // Tile layout: word t*WPT + g*D + v holds vector v of rows VPW*g+r.
  task automatic load_memory();
    for (int t = 0; t < int'(KAPPA); t++)
      for (int g = 0; g < int'(GPT); g++)
        for (int v = 0; v < int'(D); v++) begin
          logic [MEM_W-1:0] wa, wb;
          wa = '0;
          wb = '0;
          for (int r = 0; r < int'(VPW); r++)
            for (int e = 0; e < int'(N); e++) begin
              wa[(r*N + e)*2 +: 2] = A[t*TILE + g*VPW + r][v*N + e];
              wb[(r*N + e)*2 +: 2] = B[v*N + e][t*TILE + g*VPW + r];
            end
          u_mem.poke(A_BASE + t*WPT + g*D + v, wa);
          u_mem.poke(B_BASE + t*WPT + g*D + v, wb);
        end
    for (int w = 0; w < int'(KAPPA * KAPPA * CWORDS); w++) u_mem.poke(C_BASE + w, '1);
  endtask

  task automatic compare_result();
    int unsigned bad;
    bad = 0;
    for (int i = 0; i < int'(KAPPA); i++)
      for (int j = 0; j < int'(KAPPA); j++) begin
        logic [CWORDS*MEM_W-1:0] flat;
        for (int w = 0; w < int'(CWORDS); w++)
          flat[w*MEM_W +: MEM_W] = u_mem.peek(C_BASE + (i*KAPPA + j)*CWORDS + w);
        for (int r = 0; r < int'(TILE); r++)
          for (int c = 0; c < int'(TILE); c++)
            if (flat[(r*TILE + c)*2 +: 2] != C[i*TILE + r][j*TILE + c]) begin
              if (bad < 5)
                $display("FAIL: C[%0d][%0d] = %0d, expected %0d", i*TILE + r, j*TILE + c,
                         flat[(r*TILE + c)*2 +: 2], C[i*TILE + r][j*TILE + c]);
              bad++;
            end
        checks++;
      end
    if (bad != 0) failures++;
    $display("compared %0d tiles, %0d wrong elements", KAPPA*KAPPA, bad);
  endtask

  function automatic int unsigned expected_reads();
    int unsigned w;
    w = Z * WPT;                                    // prologue
    for (int js = 1; js < int'(NPHASE); js++) begin
      w += WPT;                                     // next column tile
      if (PPS * ((js - 1) / PPS + 1) < NPHASE) w += GPR * D;  // rows of the next row tile
    end
    return w;
  endfunction

  task automatic run(int unsigned stall_pct, int unsigned seed, bit exact_time);
    longint unsigned t0;
    make_matrices(seed);
    load_memory();
    u_mem.stall_pct = stall_pct;
    u_mem.blackout_period = (stall_pct != 0) ? 10 * D : 0;
    u_mem.blackout_len    = 3 * D;
    u_mem.blackout_wr_only = 1'b1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t0 = cyc;
    wait (!done);
    wait (done);
    @(posedge clk);
    $display("run (stall %0d%%): %0d cycles, activations %0d, load stalls %0d, write-back stalls %0d, swaps %0d, wraps %0d, reads %0d, writes %0d",
             stall_pct, cyc - t0, n_act, n_stall_load, n_stall_wb, n_row_swaps, n_wraps, n_rd_words, n_wr_words);
    compare_result();
    check(n_act == GAMMA, "activations == d*kappa^2");
    check(n_wr_words == KAPPA * KAPPA * CWORDS, "words written");
    check(n_rd_words == expected_reads(), "words read");
    check(n_row_swaps == NPHASE / PPS - 1, "row-store swaps");
    check(u_mem.proto_errs == 0 && u_mem.bad_addr == 0, "memory protocol");
    if (exact_time) begin
      $display("first to last activation: %0d cycles (d*kappa^2 = %0d)", last_act_cyc - first_act_cyc + 1, GAMMA);
      check(last_act_cyc - first_act_cyc + 1 == GAMMA, "computation time == d*kappa^2 (memory hidden)");
    end
    if (n_stall_load > 0) ev_stall_load++;
    if (n_stall_wb > 0)   ev_stall_wb++;
    if (n_row_swaps > 0)  ev_swaps++;
    if (n_wraps > 0)      ev_wraps++;
  endtask

  initial begin
    $display("config: N=%0d D=%0d k=%0d kappa=%0d z=%0d phases=%0d; per phase %0d words in %0d cycles",
             N, D, K, KAPPA, Z, NPHASE, PHASE_WORDS, (Z - 1) * D);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    selftest_en = 1'b1;
    run(0, 11, HIDDEN);
    run(40, 23, 1'b0);
    selftest_en = 1'b0;
    if (selftest_checks > 0) ev_selftest++;
    check(!selftest_err && selftest_errors == 0, "self-test without errors");
    check(ev_stall_load > 0, "a load stall happened");
    check(ev_stall_wb > 0,   "a write-back stall happened");
    check(ev_swaps > 0,      "a row-store swap happened");
    check(ev_wraps > 0,      "the row-tile index wrapped");
    check(ev_selftest > 0,   "the self-test compared");
    $display("events: load stalls %0d, write-back stalls %0d, swaps %0d, wraps %0d, self-test checks %0d",
             ev_stall_load, ev_stall_wb, ev_swaps, ev_wraps, selftest_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
