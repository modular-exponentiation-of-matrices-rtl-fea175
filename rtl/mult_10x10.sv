// mult_10x10: the M10x10 unit of Fig. 3, ten row multipliers R_0..R_9.
//
// Row multiplier r takes row vector a[r] and all column vectors b[0..9], so
// c[r][j] = s_in[r][j] + a[r] . b[j] mod 4 for a 10x10 block. Combinational.
module mult_10x10
  import matmul_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned SZ = SUB
) (
  input  logic [SZ-1:0][N-1:0][1:0]  a,
  input  logic [SZ-1:0][N-1:0][1:0]  b,
  input  logic [SZ-1:0][SZ-1:0][1:0] s_in,
  output logic [SZ-1:0][SZ-1:0][1:0] c
);

  for (genvar r = 0; r < SZ; r++) begin : g_row
    row_mult #(.N(N), .COLS(SZ)) u_r (
      .a    (a[r]),
      .b    (b),
      .s_in (s_in[r]),
      .c    (c[r])
    );
  end

endmodule
