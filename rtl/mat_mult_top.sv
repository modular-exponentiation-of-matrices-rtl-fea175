// mat_mult_top: the complete mod-4 matrix multiplier, C = A x B over Z_4.
//
// Z row-stores and two column-stores (tile_store, the T_20n^d containers of
// Fig. 6) feed one mult_20x20; matmul_ctrl runs the improved schedule,
// streams A and B in from external memory while the multiplier works and
// writes C back. The active row-store and column-store are selected by
// multiplexers in front of the multiplier. With the defaults (n = 28,
// d = 32, k = 896, kappa = 45, z = 10) a multiplication takes
// d * kappa^2 = 64800 activations plus a prologue that loads the first
// z-1 row tiles and one column tile.
//
// The Subject/Examiner timing tester of the chain-length experiment is
// included as a self-test unit beside the datapath (selftest_*); it shares
// nothing with the multiplier.
//
// The external memory (DDR2 through the vendor memory interface) and the
// host link are outside this module: the memory channels are ports, and
// start / base addresses / done are the host's view. See matmul_ctrl for
// the memory layout and channel rules.
module mat_mult_top
  import matmul_pkg::*;
#(
  parameter int unsigned N     = N_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned Z     = Z_DEF,
  parameter int unsigned KAPPA = kappa_of(N_DEF, D_DEF),
  parameter int unsigned VPW   = VPW_DEF
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [ADDR_W-1:0]  a_base,
  input  logic [ADDR_W-1:0]  b_base,
  input  logic [ADDR_W-1:0]  c_base,
  output logic               busy,
  output logic               done,
  // memory channels
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output mem_cmd_t           cmd,
  output logic               wdf_valid,
  input  logic               wdf_ready,
  output logic [MEM_W-1:0]   wdf_data,
  output logic [MEM_W/8-1:0] wdf_mask,
  input  logic               rd_valid,
  input  logic [MEM_W-1:0]   rd_data,
  // self-test
  input  logic               selftest_en,
  output logic               selftest_err,
  output logic [31:0]        selftest_checks,
  output logic [31:0]        selftest_errors,
  // event counters
  output logic [31:0]        n_act,
  output logic [31:0]        n_stall_load,
  output logic [31:0]        n_stall_wb,
  output logic [31:0]        n_row_swaps,
  output logic [31:0]        n_wraps,
  output logic [31:0]        n_rd_words,
  output logic [31:0]        n_wr_words
);

  localparam int unsigned ZW = $clog2(Z);
  localparam int unsigned GW = $clog2(TILE / VPW);

  logic                           ld_valid, ld_col;
  logic [ZW-1:0]                  ld_store;
  logic [GW-1:0]                  ld_group;
  logic [VPW-1:0][N-1:0][1:0]     ld_vecs;
  logic                           act, act_col_store, mult_first;
  logic [ZW-1:0]                  act_row_store;
  logic [TILE-1:0][TILE-1:0][1:0] tile_c;

  logic [TILE-1:0]                ld_en_t;     // rows of the addressed store
  logic [TILE-1:0][N-1:0][1:0]    ld_vec_t;
  logic [TILE-1:0][N-1:0][1:0]    row_q [Z];
  logic [TILE-1:0][N-1:0][1:0]    col_q [2];
  logic [TILE-1:0][N-1:0][1:0]    a_op, b_op;

  matmul_ctrl #(.N(N), .D(D), .Z(Z), .KAPPA(KAPPA), .VPW(VPW)) u_ctrl (
    .clk, .rst_n, .start, .a_base, .b_base, .c_base, .busy, .done,
    .cmd_valid, .cmd_ready, .cmd, .wdf_valid, .wdf_ready, .wdf_data, .wdf_mask,
    .rd_valid, .rd_data,
    .ld_valid, .ld_col, .ld_store, .ld_group, .ld_vecs,
    .act, .act_row_store, .act_col_store, .mult_first, .tile_c,
    .n_act, .n_stall_load, .n_stall_wb, .n_row_swaps, .n_wraps,
    .n_rd_words, .n_wr_words
  );

  // A memory word carries VPW vectors for rows VPW*g .. VPW*g+VPW-1.
  always_comb begin
    for (int t = 0; t < int'(TILE); t++) begin
      ld_en_t[t]  = ld_valid && (GW'(t / int'(VPW)) == ld_group);
      ld_vec_t[t] = ld_vecs[t % int'(VPW)];
    end
  end

  for (genvar s = 0; s < int'(Z); s++) begin : g_row_store
    tile_store #(.N(N), .D(D), .SZ(TILE)) u_rs (
      .clk    (clk),
      .act    (act && act_row_store == ZW'(s)),
      .ld_en  ((!ld_col && ld_store == ZW'(s)) ? ld_en_t : '0),
      .ld_vec (ld_vec_t),
      .q      (row_q[s])
    );
  end

  for (genvar s = 0; s < 2; s++) begin : g_col_store
    tile_store #(.N(N), .D(D), .SZ(TILE)) u_cs (
      .clk    (clk),
      .act    (act && act_col_store == 1'(s)),
      .ld_en  ((ld_col && ld_store == ZW'(s)) ? ld_en_t : '0),
      .ld_vec (ld_vec_t),
      .q      (col_q[s])
    );
  end

  always_comb begin
    a_op = row_q[act_row_store];
    b_op = col_q[act_col_store];
  end

  mult_20x20 #(.N(N), .SZ(TILE)) u_mult (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (act),
    .first (mult_first),
    .a     (a_op),
    .b     (b_op),
    .c     (tile_c)
  );

  timing_tester #(.N(N)) u_selftest (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (selftest_en),
    .err      (selftest_err),
    .n_checks (selftest_checks),
    .n_errors (selftest_errors)
  );

endmodule
