// sma_unit: one 8x8 SMA unit, an array of sma_pe.
//
// PE(n,k) sits in row n, column k; its lane number is n*N + k (the PEs of
// row 0 are lanes 0..7, those of row 7 lanes 56..63).
//   Systolic mode: a_col[k] is broadcast to every PE of column k in the same
//   cycle, each PE multiplies it by its stationary weight b and adds the
//   partial sum of its left neighbour (column 0 adds +0), and the registered
//   sums move one column right per cycle. With PE(n,k) holding B[k][n] and
//   A[i][k] presented on a_col[k] in cycle i+k (relative), psum_out[n] holds
//   sum_k A[i][k]*B[k][n] = (A x B)[i][n] in cycle i+N: the N outputs of one
//   cycle are one row of the product, so writing C is a coalesced access.
//   SIMD mode: each PE is an independent lane computing a*b+c.
// The column broadcast and right-going partial sums follow the paper's
// semi-broadcasted weight-stationary dataflow; the C[in] addition is done by
// the row-end adders in the systolic controller, outside this module.
//
// Interface: per-lane packed vectors of FP32 words; all PEs share mode and
// en. Timing: one cycle per PE, so N cycles from column 0 to psum_out.
module sma_unit
  import sma_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  pe_mode_e               mode,
  input  logic                   en,
  input  logic [N*N-1:0]         active_mask,
  input  logic [N*N-1:0][31:0]   b,        // operand b / stationary weights
  input  logic [N*N-1:0][31:0]   a_lane,
  input  logic [N*N-1:0][31:0]   c_lane,
  input  logic [N-1:0][31:0]     a_col,    // broadcast A, one per column
  output logic [N*N-1:0][31:0]   lane_y,   // every PE's result register
  output logic [N-1:0][31:0]     psum_out  // right edge of each row
);
  for (genvar n = 0; n < N; n++) begin : g_row
    for (genvar k = 0; k < N; k++) begin : g_col
      fp32_t psum_in;
      if (k == 0) begin : g_left
        assign psum_in = '0;
      end else begin : g_inner
        assign psum_in = lane_y[n*N + k - 1];
      end
      sma_pe u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .mode    (mode),
        .en      (en),
        .active  (active_mask[n*N + k]),
        .b       (b[n*N + k]),
        .a_lane  (a_lane[n*N + k]),
        .c_lane  (c_lane[n*N + k]),
        .a_bcast (a_col[k]),
        .psum_in (psum_in),
        .y       (lane_y[n*N + k])
      );
    end
    assign psum_out[n] = lane_y[n*N + N - 1];
  end
endmodule
