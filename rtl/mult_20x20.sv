// mult_20x20: the M20x20 multiplier of Fig. 3 with the iterated_m feedback.
//
// Four mult_10x10 blocks are arranged as a 2x2 grid: block (R,C) takes row
// vectors a[10R..10R+9] and column vectors b[10C..10C+9], so the 400 dot
// chains give every element of a 20x20 output tile. Each chain output is
// stored in a two-bit accumulator register that is fed back to the chain's
// sum input, as in function iterated_m (c_{n-1} -> s_0). One activation per
// clock: with en high, acc <= (first ? 0 : acc) + a[r] . b[c] mod 4. After
// the d activations of one iteration, c holds the 20x20 tile of C, and it
// keeps it until the next activation with first set.
//
// The accumulator registers and the first/en handshake are this design's
// way of realising the feedback; the grid of multipliers follows the paper.
module mult_20x20
  import matmul_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned SZ = TILE
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,     // one activation this cycle
  input  logic                       first,  // first activation of an iteration
  input  logic [SZ-1:0][N-1:0][1:0]  a,      // twenty row vectors
  input  logic [SZ-1:0][N-1:0][1:0]  b,      // twenty column vectors
  output logic [SZ-1:0][SZ-1:0][1:0] c       // accumulated tile
);

  localparam int unsigned H = SZ / 2;

  logic [SZ-1:0][SZ-1:0][1:0] acc, s_in, sum;

  always_comb begin
    for (int r = 0; r < SZ; r++)
      for (int k = 0; k < SZ; k++)
        s_in[r][k] = first ? 2'b00 : acc[r][k];
  end

  for (genvar br = 0; br < 2; br++) begin : g_br
    for (genvar bc = 0; bc < 2; bc++) begin : g_bc
      logic [H-1:0][H-1:0][1:0] blk_s, blk_c;
      for (genvar r = 0; r < H; r++) begin : g_map
        assign blk_s[r] = s_in[br*H + r][bc*H +: H];
        assign sum[br*H + r][bc*H +: H] = blk_c[r];
      end
      mult_10x10 #(.N(N), .SZ(H)) u_blk (
        .a    (a[br*H +: H]),
        .b    (b[bc*H +: H]),
        .s_in (blk_s),
        .c    (blk_c)
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= sum;
  end

  assign c = acc;

endmodule
