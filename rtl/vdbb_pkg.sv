// vdbb_pkg: constants and types shared by the STA-VDBB accelerator.
//
// The default geometry is the 4x8x8_4x8 configuration: a 4 x 8 grid (M x N)
// of tensor PEs, each computing an A x C = 4 x 8 tile of outputs from an
// activation tensor of A rows x BZ = 8 elements and C compressed weights per
// cycle. Operands are INT8, accumulators INT32, the DBB block size is 8 and
// a block may hold any number of non-zeros from 1 to 8 (variable DBB).
// The buffer sizes (2 MB activations, 0.5 MB weights, 64 KB MCU program
// store) follow the same configuration. The configuration record of the
// tile sequencer is this design's own choice.
package vdbb_pkg;

  // Array geometry A x B x C _ M x N.
  localparam int unsigned TPE_A = 4;   // activation rows per TPE
  localparam int unsigned BZ    = 8;   // DBB block size (B)
  localparam int unsigned TPE_C = 8;   // weight columns per TPE
  localparam int unsigned ARR_M = 4;   // TPE rows
  localparam int unsigned ARR_N = 8;   // TPE columns

  localparam int unsigned IDX_W = $clog2(BZ);  // in-block index width
  localparam int unsigned ACC_W = 32;          // INT32 accumulators

  // IM2COL unit geometry: a 6 x 4 pixel patch, 3 x 3 kernel, two groups of
  // four output windows per step, nine steps per patch.
  localparam int unsigned IM_ROWS  = 6;
  localparam int unsigned IM_WIN   = 4;
  localparam int unsigned IM_STEPS = 9;

  // Buffer capacities in bytes.
  localparam int unsigned AB_BYTES  = 2 * 1024 * 1024;
  localparam int unsigned WB_BYTES  = 512 * 1024;
  localparam int unsigned MCU_BYTES = 64 * 1024;

  // Field widths of the tile sequencer configuration.
  localparam int unsigned ADDR_W = 16;
  localparam int unsigned CNT_W  = 16;

  // Configuration of one GEMM (a whole layer, as tiles_m x tiles_n tiles).
  typedef struct packed {
    logic [3:0]        nnz;            // non-zeros per block, 1..8 (cycles per block)
    logic              im2col_en;      // 1: activations through IM2COL, 0: bypass
    logic [CNT_W-1:0]  k_blocks;       // DBB blocks along K per tile
    logic [ADDR_W-1:0] ab_base;        // first activation word
    logic [ADDR_W-1:0] ab_tile_stride; // activation words per row tile
    logic [ADDR_W-1:0] wb_base;        // first compressed weight row
    logic [ADDR_W-1:0] msk_base;       // first bitmask row
    logic [7:0]        tiles_m;        // row tiles (A*M GEMM rows each)
    logic [7:0]        tiles_n;        // column tiles (C*N GEMM columns each)
  } gemm_cfg_t;

endpackage
