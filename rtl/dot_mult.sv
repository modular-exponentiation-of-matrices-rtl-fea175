// dot_mult: the dot-product multiplier m of Fig. 2.
//
// N ma_lut units are cascaded: the c output of L[i] is the s input of
// L[i+1], s_in feeds L[0] and w = c[N-1]. The result is
// w = s_in + sum_i u[i]*v[i] mod 4, computed combinationally so that it
// settles within one clock (N = 28 was the longest chain found to work at
// 100 MHz on the Virtex-5). Feeding w back to s_in through a register turns
// the chain into the iterated_m accumulator (done in mult_20x20).
//
// Interface: u, v are N-element vectors of Z_4 (element i in bits [2i+1:2i]).
module dot_mult
  import matmul_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic [N-1:0][1:0] u,
  input  logic [N-1:0][1:0] v,
  input  z4_t               s_in,
  output z4_t               w
);

  z4_t chain [N+1];

  assign chain[0] = s_in;

  for (genvar i = 0; i < N; i++) begin : g_ma
    ma_lut u_ma (
      .a (u[i]),
      .b (v[i]),
      .s (chain[i]),
      .c (chain[i+1])
    );
  end

  assign w = chain[N];

endmodule
