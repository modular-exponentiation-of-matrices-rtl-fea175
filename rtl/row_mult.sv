// row_mult: the row multiplier R = (m_0 .. m_9) of Fig. 3.
//
// COLS dot_mult chains share the same row vector a and each takes its own
// column vector b[j] and sum input s_in[j], giving COLS consecutive
// elements of one row of the product. Combinational.
module row_mult
  import matmul_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned COLS = SUB
) (
  input  logic [N-1:0][1:0]            a,
  input  logic [COLS-1:0][N-1:0][1:0]  b,
  input  logic [COLS-1:0][1:0]         s_in,
  output logic [COLS-1:0][1:0]         c
);

  for (genvar j = 0; j < COLS; j++) begin : g_m
    dot_mult #(.N(N)) u_m (
      .u    (a),
      .v    (b[j]),
      .s_in (s_in[j]),
      .w    (c[j])
    );
  end

endmodule
