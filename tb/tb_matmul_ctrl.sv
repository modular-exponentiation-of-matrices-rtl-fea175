// tb_matmul_ctrl: schedule checker for the controller alone, at reduced
// size (n = 8, d = 25, k = 200, kappa = 10, z = 3), with the memory model
// stalling at random. The containers and the multiplier are replaced by
// bookkeeping here:
//   * every read command's address is queued; when its data return, the
//     tile, row group and vector index it carries are worked out from the
//     address and the store it is routed to is marked as holding them,
//     vector by vector (loads must arrive in vector order);
//   * on every activation the selected row-store and column-store must be
//     completely loaded, with one tile each, and must not be receiving
//     data; each iteration starts with both containers at rest;
//   * the tile of C an iteration computes, (row tile, column tile), is
//     taken from the stores' contents, and after its last activation the
//     tile input is set to a signature of (i, j) (garbage before);
//   * every written word must carry the signature of the tile its address
//     names; at the end every tile must be computed once and written once,
//     and the activation count must be d*kappa^2.
module tb_matmul_ctrl;
  import matmul_pkg::*;

  localparam int unsigned N      = 8;
  localparam int unsigned D      = 25;
  localparam int unsigned Z      = 3;
  localparam int unsigned KAPPA  = kappa_of(N, D);
  localparam int unsigned VPW    = 4;
  localparam int unsigned GPT    = TILE / VPW;
  localparam int unsigned WPT    = GPT * D;
  localparam int unsigned CWORDS = (TILE * TILE * 2 + MEM_W - 1) / MEM_W;
  localparam int unsigned A_BASE = 0;
  localparam int unsigned B_BASE = KAPPA * WPT;
  localparam int unsigned C_BASE = 2 * KAPPA * WPT;
  localparam int unsigned WORDS  = C_BASE + KAPPA * KAPPA * CWORDS;
  localparam int unsigned ZW     = $clog2(Z);
  localparam int unsigned GW     = $clog2(GPT);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  always #5 clk = ~clk;

  logic busy, done;
  logic cmd_valid, cmd_ready, wdf_valid, wdf_ready, rd_valid;
  mem_cmd_t cmd;
  logic [MEM_W-1:0] wdf_data, rd_data;
  logic [MEM_W/8-1:0] wdf_mask;
  logic ld_valid, ld_col, act, act_col_store, mult_first;
  logic [ZW-1:0] ld_store, act_row_store;
  logic [GW-1:0] ld_group;
  logic [VPW-1:0][N-1:0][1:0] ld_vecs;
  logic [TILE-1:0][TILE-1:0][1:0] tile_c;
  logic [31:0] n_act, n_stall_load, n_stall_wb, n_row_swaps, n_wraps, n_rd_words, n_wr_words;

  ddr_model #(.WORDS(WORDS), .LAT(9)) u_mem (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .wdf_valid, .wdf_ready,
    .wdf_data, .wdf_mask, .rd_valid, .rd_data
  );

  matmul_ctrl #(.N(N), .D(D), .Z(Z), .KAPPA(KAPPA), .VPW(VPW)) u_dut (
    .clk, .rst_n, .start,
    .a_base (ADDR_W'(A_BASE)), .b_base (ADDR_W'(B_BASE)), .c_base (ADDR_W'(C_BASE)),
    .busy, .done, .cmd_valid, .cmd_ready, .cmd, .wdf_valid, .wdf_ready, .wdf_data,
    .wdf_mask, .rd_valid, .rd_data, .ld_valid, .ld_col, .ld_store, .ld_group, .ld_vecs,
    .act, .act_row_store, .act_col_store, .mult_first, .tile_c,
    .n_act, .n_stall_load, .n_stall_wb, .n_row_swaps, .n_wraps, .n_rd_words, .n_wr_words
  );

  // store bookkeeping: [0] = row-stores, [1] = column-stores
  int held_tile [2][Z][TILE];
  int held_cnt  [2][Z][TILE];
  int pos       [2][Z];          // activations mod D since rest
  int addr_q [$];
  int computed [KAPPA][KAPPA];
  int written  [KAPPA][KAPPA];
  int cur_i, cur_j, act_in_iter;
  int unsigned checks = 0, failures = 0;

  function automatic logic [TILE-1:0][TILE-1:0][1:0] signature(int i, int j);
    logic [TILE-1:0][TILE-1:0][1:0] s;
    for (int r = 0; r < int'(TILE); r++)
      for (int c = 0; c < int'(TILE); c++) s[r][c] = 2'(i * 7 + j * 3 + r + 2 * c + r * c);
    return s;
  endfunction

  task automatic fail(string what);
    failures++;
    if (failures < 10) $display("FAIL @%0t: %s", $time, what);
  endtask

  always @(posedge clk) if (rst_n) begin
    // read commands
    if (cmd_valid && cmd_ready && !cmd.write) addr_q.push_back(int'(cmd.addr));
    // write commands
    if (cmd_valid && cmd_ready && cmd.write) begin
      int a, ti, tj, w;
      logic [CWORDS*MEM_W-1:0] flat;
      a  = int'(cmd.addr) - int'(C_BASE);
      w  = a % int'(CWORDS);
      ti = (a / int'(CWORDS)) / int'(KAPPA);
      tj = (a / int'(CWORDS)) % int'(KAPPA);
      flat = (CWORDS*MEM_W)'(signature(ti, tj));
      checks++;
      if (a < 0 || ti >= int'(KAPPA)) fail("write outside C");
      else begin
        if (wdf_data != flat[w*MEM_W +: MEM_W]) fail($sformatf("tile (%0d,%0d) word %0d wrong", ti, tj, w));
        if (w == int'(CWORDS) - 1) written[ti][tj]++;
      end
    end
    // read data routed to a store
    if (rd_valid) begin
      int a, k, tile, g, v, s;
      a = addr_q.pop_front();
      k = (a >= int'(B_BASE)) ? 1 : 0;
      a = a - (k ? int'(B_BASE) : int'(A_BASE));
      tile = a / int'(WPT);
      g    = (a % int'(WPT)) / int'(D);
      v    = a % int'(D);
      s    = int'(ld_store);
      checks++;
      if (!ld_valid || int'(ld_col) != k || int'(ld_group) != g) fail("load routed wrongly");
      if (act && ((k == 1 && s == int'(act_col_store)) || (k == 0 && s == int'(act_row_store))))
        fail("load into an active store");
      for (int r = 0; r < int'(VPW); r++) begin
        int t;
        t = g * int'(VPW) + r;
        if (v == 0) begin
          held_tile[k][s][t] = tile;
          held_cnt[k][s][t]  = 1;
        end else if (held_tile[k][s][t] != tile || held_cnt[k][s][t] != v) begin
          fail("load out of order");
        end else begin
          held_cnt[k][s][t]++;
        end
      end
    end
    // activations
    if (act) begin
      int rs, cs;
      rs = int'(act_row_store);
      cs = int'(act_col_store);
      checks++;
      for (int t = 0; t < int'(TILE); t++)
        if (held_cnt[0][rs][t] != int'(D) || held_cnt[1][cs][t] != int'(D) ||
            held_tile[0][rs][t] != held_tile[0][rs][0] || held_tile[1][cs][t] != held_tile[1][cs][0])
          fail("activation of an incompletely loaded store");
      if (mult_first) begin
        if (pos[0][rs] != 0 || pos[1][cs] != 0) fail("iteration starts with a store off its rest position");
        if (act_in_iter != 0) fail("iteration restarted early");
        cur_i = held_tile[0][rs][0];
        cur_j = held_tile[1][cs][0];
      end
      pos[0][rs] = (pos[0][rs] + 1) % int'(D);
      pos[1][cs] = (pos[1][cs] + 1) % int'(D);
      act_in_iter++;
      if (act_in_iter == int'(D)) begin
        act_in_iter = 0;
        computed[cur_i][cur_j]++;
        tile_c <= signature(cur_i, cur_j);
      end else begin
        tile_c <= {TILE*TILE{2'($urandom)}};
      end
    end
  end

  initial begin
    foreach (held_cnt[k, s, t]) begin held_cnt[k][s][t] = 0; held_tile[k][s][t] = -1; end
    foreach (pos[k, s]) pos[k][s] = 0;
    foreach (computed[i, j]) begin computed[i][j] = 0; written[i][j] = 0; end
    act_in_iter = 0;
    tile_c = '0;
    u_mem.stall_pct = 25;
    u_mem.blackout_period = 10 * D;
    u_mem.blackout_len    = 3 * D;
    u_mem.blackout_wr_only = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    repeat (3) @(posedge clk);
    foreach (computed[i, j]) begin
      checks++;
      if (computed[i][j] != 1 || written[i][j] != 1)
        fail($sformatf("tile (%0d,%0d) computed %0d, written %0d times", i, j, computed[i][j], written[i][j]));
    end
    checks++;
    if (n_act != D * KAPPA * KAPPA) fail("activation count");
    checks++;
    if (n_row_swaps == 0 || n_wraps == 0 || n_stall_load == 0 || n_stall_wb == 0)
      fail($sformatf("mechanism missing: swaps %0d wraps %0d load stalls %0d wb stalls %0d",
                     n_row_swaps, n_wraps, n_stall_load, n_stall_wb));
    $display("activations %0d, load stalls %0d, write-back stalls %0d, swaps %0d, wraps %0d",
             n_act, n_stall_load, n_stall_wb, n_row_swaps, n_wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
