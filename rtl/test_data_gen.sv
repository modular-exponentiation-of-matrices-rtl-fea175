// test_data_gen: the test data generator D of the timing experiment.
//
// Produces the sequence D_i = D_{i-1} + D_{i-2} + 2 D_{i-4} + D_{i-5}
// (taken mod 4 here, since the data are Z_4 elements; the modulus is not
// stated), starting from D_0 = D_1 = D_2 = D_3 = 0, D_4 = 1. Each enabled
// clock it emits the next 2N terms: u = terms 0..N-1 and v = terms N..2N-1
// of the step, element i in bits [2i+1:2i]. The recurrence is unrolled
// combinationally over the 2N terms; only the last five terms are stored.
// After reset the first output is D_5 .. D_{5+2N-1}.
module test_data_gen
  import matmul_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  output logic [N-1:0][1:0] u,
  output logic [N-1:0][1:0] v
);

  localparam int unsigned L = 2 * N;

  z4_t hist [5];          // hist[0] = newest, hist[4] = oldest of the last five
  z4_t seq  [L + 5];      // seq[0..4] = history oldest first, then new terms

  always_comb begin
    for (int i = 0; i < 5; i++) seq[i] = hist[4-i];
    for (int i = 5; i < int'(L) + 5; i++)
      seq[i] = seq[i-1] + seq[i-2] + {seq[i-4][0], 1'b0} + seq[i-5];
    for (int i = 0; i < int'(N); i++) begin
      u[i] = seq[5 + i];
      v[i] = seq[5 + N + i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist[0] <= 2'd1;    // D_4
      hist[1] <= 2'd0;
      hist[2] <= 2'd0;
      hist[3] <= 2'd0;
      hist[4] <= 2'd0;    // D_0
    end else if (en) begin
      for (int i = 0; i < 5; i++) hist[i] <= seq[L + 4 - i];
    end
  end

endmodule
