// vec_container: the container t_n^d, a queue of D vectors of N elements.
//
// It is a plain shift register, the structure the SRL32 LUTs of the FPGA
// implement: on every shift, entry 0 leaves through q, the others move down
// one place and the incoming vector enters at entry D-1. Filling it with
// f_0, f_1, .. f_{D-1} (in that order) and then shifting D times presents
// f_0 .. f_{D-1} on q, one per clock, as the paper's activations do.
//
// When shifting with load low, the leaving vector re-enters at the tail, so
// D activations leave the content unchanged. This recirculation is this
// design's choice: the improved schedule reuses a column-store for z-1
// iterations and a row-store for several column tiles, which an emptying
// queue could not do without reloading from memory.
//
// Interface: shift (one step per clock), load (1: take d_in, 0: recirculate).
// q is the registered head entry, valid in the cycle after the shift that
// brought it there. No reset: the content is data, written before use.
module vec_container
  import matmul_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned D = D_DEF
) (
  input  logic              clk,
  input  logic              shift,
  input  logic              load,
  input  logic [N-1:0][1:0] d_in,
  output logic [N-1:0][1:0] q
);

  logic [N-1:0][1:0] mem [D];

  always_ff @(posedge clk) begin
    if (shift) begin
      for (int i = 0; i < int'(D) - 1; i++) mem[i] <= mem[i+1];
      mem[D-1] <= load ? d_in : mem[0];
    end
  end

  assign q = mem[0];

endmodule
