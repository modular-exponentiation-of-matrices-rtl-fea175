// ma_lut: the multiply-accumulate unit L(a,b,s) = a*b + s mod 4.
//
// Follows Fig. 1 and Tables 1-2 of the design description: the low result
// bit gamma0 comes from a three-input LUT l0 addressed by the low bits
// (alpha0, beta0, sigma0), the high bit gamma1 from a six-input LUT l1
// addressed by all of a, b and s. The LUT contents below are the two
// tables copied cell by cell, so on a 6-LUT device each bit maps to one
// LUT. Purely combinational; no clock.
//
// Interface: a, b, s are two-bit elements of Z_4, c is the two-bit result.
module ma_lut
  import matmul_pkg::*;
(
  input  z4_t a,
  input  z4_t b,
  input  z4_t s,
  output z4_t c
);

  // Table 1: l0 rows indexed by (alpha0,beta0), column by sigma0 (left = 0).
  localparam logic [0:1] L0_TABLE [4] = '{
    2'b01,   // (0,0)
    2'b01,   // (0,1)
    2'b01,   // (1,0)
    2'b10    // (1,1)
  };

  // Table 2: l1 rows indexed by (a,b), columns by s = 0..3 (left = 0).
  localparam logic [0:3] L1_TABLE [16] = '{
    4'b0011, 4'b0011, 4'b0011, 4'b0011,   // (0,0) (0,1) (0,2) (0,3)
    4'b0011, 4'b0110, 4'b1100, 4'b1001,   // (1,0) (1,1) (1,2) (1,3)
    4'b0011, 4'b1100, 4'b0011, 4'b1100,   // (2,0) (2,1) (2,2) (2,3)
    4'b0011, 4'b1001, 4'b1100, 4'b0110    // (3,0) (3,1) (3,2) (3,3)
  };

  logic [1:0] l0_row;
  logic [3:0] l1_row;

  always_comb begin
    l0_row = {a[0], b[0]};
    l1_row = {a, b};
    c[0]   = L0_TABLE[l0_row][s[0]];
    c[1]   = L1_TABLE[l1_row][s];
  end

endmodule
