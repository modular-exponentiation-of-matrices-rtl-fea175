// tile_store: the container T_20n^d of Fig. 4, twenty t_n^d in parallel.
//
// It holds twenty rows of A (a row-store) or twenty columns of B (a
// column-store). An activation (act) shifts all twenty containers at once
// and recirculates their content; q[t] is the current vector of row or
// column t, the input that M20x20 needs in one step. Loading shifts only the
// containers selected by ld_en, each taking its own vector ld_vec[t], so a
// memory word carrying vectors of several rows fills them side by side.
// act and a load must not hit the same store in the same cycle (the
// controller never does this; an assertion checks it).
module tile_store
  import matmul_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned D  = D_DEF,
  parameter int unsigned SZ = TILE
) (
  input  logic                      clk,
  input  logic                      act,
  input  logic [SZ-1:0]             ld_en,
  input  logic [SZ-1:0][N-1:0][1:0] ld_vec,
  output logic [SZ-1:0][N-1:0][1:0] q
);

  for (genvar t = 0; t < SZ; t++) begin : g_t
    vec_container #(.N(N), .D(D)) u_t (
      .clk   (clk),
      .shift (act | ld_en[t]),
      .load  (ld_en[t]),
      .d_in  (ld_vec[t]),
      .q     (q[t])
    );
  end

  a_no_load_while_active: assert property (@(posedge clk) act |-> ld_en == '0)
    else $error("tile_store: load and activation in the same cycle");

endmodule
