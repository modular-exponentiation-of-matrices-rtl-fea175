// matmul_pkg: shared constants and types of the mod-4 matrix multiplier.
//
// The multiplier works on matrices over Z_4, so every matrix element is a
// two-bit number. The default sizes are those of the Virtex-5 build:
// n = 28 multiply-accumulate units per dot-product chain, d = 32 vectors per
// container (the depth of one SRL32 LUT), matrices of k = n*d = 896, a 20x20
// output tile per iteration, and z = 10 row-stores. The memory word is 256
// bits, one 100 MHz cycle worth of the 64-bit DDR2 bus at 200 MHz; each word
// carries four n-element vectors (224 of its 256 bits), a layout choice of
// this design.
package matmul_pkg;

  typedef logic [1:0] z4_t;              // one element of Z_4

  localparam int unsigned N_DEF     = 28;  // MA units per m chain (paper, Sec. 5)
  localparam int unsigned D_DEF     = 32;  // container depth (paper, Sec. 6)
  localparam int unsigned TILE      = 20;  // M20x20 output tile edge (paper, Sec. 4)
  localparam int unsigned SUB       = 10;  // M10x10 sub-block edge (paper, Sec. 4)
  localparam int unsigned Z_DEF     = 10;  // row-stores (paper, Sec. 6)
  localparam int unsigned MEM_W     = 256; // memory word width (derived, see above)
  localparam int unsigned ADDR_W    = 32;  // memory word address width (assumed)
  localparam int unsigned VPW_DEF   = 4;   // vectors per memory word (layout choice)

  // kappa = ceil(k / 20): number of 20-row tiles of a k x k matrix
  function automatic int unsigned kappa_of(int unsigned n, int unsigned d);
    return (n * d + TILE - 1) / TILE;
  endfunction

  // Reference multiply-accumulate in Z_4, used by testbenches and assertions.
  function automatic z4_t mac4(z4_t a, z4_t b, z4_t s);
    return z4_t'((a * b + s) & 2'b11);
  endfunction

  // Memory command, mirroring the command/address FIFO of the DDR2 interface.
  typedef struct packed {
    logic              write;   // 1: write (data from the write-data FIFO), 0: read
    logic [ADDR_W-1:0] addr;    // word address (one word = MEM_W bits)
  } mem_cmd_t;

  // Controller state of the whole run.
  typedef enum logic [1:0] {
    RUN_IDLE  = 2'd0,
    RUN_BUSY  = 2'd1,
    RUN_FLUSH = 2'd2,
    RUN_DONE  = 2'd3
  } run_state_t;

endpackage
