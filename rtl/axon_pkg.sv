// axon_pkg -- types and constants shared by the Axon systolic-array RTL.
//
// The array computes in IEEE-754 binary16 (FP16), the number format of the
// 16x16 implementation described for Axon. A tile command tells the
// controller whether the tile is a plain GEMM tile or a convolution tile whose
// IFMAP operand is lowered on chip (im2col). Field widths of the command are
// this design's own choice; the paper gives no programming interface.
package axon_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t       FP16_QNAN = 16'h7E00;

  // Width of the scratchpad address and of the tile-command size fields.
  localparam int unsigned ADDR_W = 16;
  localparam int unsigned DIM_W  = 16;

  typedef enum logic [0:0] {
    MODE_GEMM = 1'b0,   // A (M x K) row-major in IFMAP, B (K x N) row-major in FILTER
    MODE_CONV = 1'b1    // IFMAP is a raw C x H x W tensor, lowered on chip
  } tile_mode_e;

  // One tile of work for the array: R output rows by C output columns.
  typedef struct packed {
    tile_mode_e         mode;
    logic [DIM_W-1:0]   k_len;     // GEMM: K. CONV: ignored (channels*n*n)
    logic [ADDR_W-1:0]  a_base;    // IFMAP buffer base address
    logic [ADDR_W-1:0]  a_stride;  // GEMM: words between rows of A
    logic [ADDR_W-1:0]  b_base;    // FILTER buffer base address
    logic [ADDR_W-1:0]  b_stride;  // GEMM: words between rows of B. CONV: words per filter
    logic [ADDR_W-1:0]  out_base;  // OUTPUT buffer entry of array row 0
    // Convolution geometry (stride 1, no padding)
    logic [DIM_W-1:0]   ifm_w;     // IFMAP width W
    logic [DIM_W-1:0]   ifm_h;     // IFMAP height H
    logic [DIM_W-1:0]   channels;  // input channels
    logic [7:0]         flt_n;     // filter length n (n x n filter)
    logic [DIM_W-1:0]   ox0;       // first output column of the tile
    logic [DIM_W-1:0]   oy;        // output row of the tile
  } tile_cmd_t;

  function automatic logic fp16_is_zero(fp16_t v);
    // Exponent 0 covers +-0 and subnormals, which this design flushes to zero.
    return v[14:10] == 5'd0;
  endfunction

endpackage
