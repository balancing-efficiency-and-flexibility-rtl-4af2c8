// sma_pkg: types and constants shared by the SMA (simultaneous multi-mode
// architecture) streaming multiprocessor.
//
// The SM holds three 8x8 SMA units of FP32 processing elements. Each unit is
// a block of SIMD lanes in SIMD mode and a semi-broadcast weight-stationary
// systolic array in systolic mode. The sizes below are the configuration the
// design is built around: 8x8 units, three per SM, a 32-bank shared memory of
// 96 KB of which 8 banks feed the systolic mode, a 256 KB register file whose
// rows hold 32 x 32-bit values (one per thread of a warp), and 64 warps.
// The number of register-file banks (4), the instruction encoding and all
// widths that follow from them are this design's own choices.
package sma_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned ARRAY_N      = 8;      // SMA unit is ARRAY_N x ARRAY_N
  localparam int unsigned NUM_UNITS    = 3;      // SMA units per SM
  localparam int unsigned UNIT_PES     = ARRAY_N * ARRAY_N;
  localparam int unsigned WARP_SIZE    = 32;     // threads per warp = lanes per RF row
  localparam int unsigned NUM_WARPS    = 64;     // warps per SM (2048 threads)

  localparam int unsigned SMEM_BANKS   = 32;     // 32-bit banks
  localparam int unsigned SMA_BANKS    = ARRAY_N; // banks 0..7 feed matrix A
  localparam int unsigned SMEM_BYTES   = 96 * 1024;
  localparam int unsigned SMEM_ROWS    = SMEM_BYTES / (4 * SMEM_BANKS); // 768
  localparam int unsigned SMEM_AW      = $clog2(SMEM_ROWS);             // 10

  localparam int unsigned RF_BYTES     = 256 * 1024;
  localparam int unsigned RF_BANKS     = 4;
  localparam int unsigned RF_ROWS      = RF_BYTES / (4 * WARP_SIZE);    // 2048 warp registers
  localparam int unsigned RF_AW        = $clog2(RF_ROWS);               // 11
  localparam int unsigned RF_BANK_ROWS = RF_ROWS / RF_BANKS;            // 512
  localparam int unsigned RF_BW        = $clog2(RF_BANKS);              // 2

  localparam int unsigned HEIGHT_W     = SMEM_AW + 1; // LSMA height, rows of A
  localparam int unsigned LGRP_W       = $clog2(WARP_SIZE / ARRAY_N); // lane group of C

  // ---------------------------------------------------------------- types
  typedef logic [31:0] fp32_t;                    // IEEE-754 binary32 bits
  typedef logic [WARP_SIZE-1:0][31:0] warp_vec_t; // one RF row / one SMEM line
  typedef logic [RF_AW-1:0]   rf_addr_t;          // flat RF row address, bank = low bits
  typedef logic [SMEM_AW-1:0] smem_addr_t;        // shared-memory row (same in every bank)
  typedef logic [$clog2(NUM_WARPS)-1:0] warp_id_t;

  typedef enum logic { MODE_SIMD = 1'b0, MODE_SYSTOLIC = 1'b1 } pe_mode_e;

  typedef enum logic [2:0] {
    OP_NOP  = 3'd0,
    OP_FFMA = 3'd1,   // rd = ra * rb + rc, 32 lanes, SIMD mode
    OP_STS  = 3'd2,   // shared[smem] = ra   (one 32-word line)
    OP_LDS  = 3'd3,   // rd = shared[smem]
    OP_LSMA = 3'd4,   // C[out] <- A[in] x B + C[in] on the systolic array
    OP_SYNC = 3'd5    // wait until every issued LSMA has completed
  } opcode_e;

  // One decoded warp instruction. Register operands are flat RF row
  // addresses. For LSMA: smem = row of A[0][*] (A[i][k] is in bank k, row
  // smem+i), rc = RF row of C[0] (C[i][8u+n] is lane 8g+n of RF row
  // rc + RF_BANKS*i + u, g = c_grp, so four 8-wide C blocks share a row), rb = RF row of the B sub-tile (unit u reads rows
  // rb+u and rb+RF_BANKS+u, lane l of beat h is B[(32h+l)/8][8u+(32h+l)%8]),
  // height = number of rows of A, unit_mask selects the units, col_mask the
  // active PE columns (inner-dimension elements).
  typedef struct packed {
    opcode_e                 op;
    rf_addr_t                rd;
    rf_addr_t                ra;
    rf_addr_t                rb;
    rf_addr_t                rc;
    smem_addr_t              smem;
    logic [HEIGHT_W-1:0]     height;
    logic [NUM_UNITS-1:0]    unit_mask;
    logic [ARRAY_N-1:0]      col_mask;
    logic [LGRP_W-1:0]       c_grp;
  } instr_t;

  // LSMA command as handed to the systolic controller.
  typedef struct packed {
    smem_addr_t              a_addr;
    rf_addr_t                c_addr;
    rf_addr_t                b_addr;
    logic [HEIGHT_W-1:0]     height;
    logic [NUM_UNITS-1:0]    unit_mask;
    logic [ARRAY_N-1:0]      col_mask;
    logic [LGRP_W-1:0]       c_grp;
  } lsma_cmd_t;

endpackage
