// systolic_controller: executes LSMA instructions on the SMA units.
//
// LSMA computes C[out] <- A[in] x B + C[in] for an M x 8 block of A held in
// shared memory, an 8 x 8 sub-tile of B per SMA unit and an M x 8 block of C
// per unit held in the register file. Units selected together form one
// 8 x (8*units) array: they share the broadcast A columns and each writes its
// own 8 columns of C.
//
// Phases of one LSMA (cycle 0 = the cycle cmd is accepted):
//   weight load, cycles 1-3: every selected unit u reads RF rows b+u and
//     b+RF_BANKS+u (two beats of 32 values) into its operand collector,
//     which holds them as the stationary weights.
//   stream, from cycle 4, counter s = 0 .. M+N+2:
//     A address generators, one per shared-memory bank k = 0..N-1: in
//       cycle s, bank k reads row a+(s-k), i.e. A[s-k][k] (uncoalesced: each
//       bank reads a different row of A). The word is registered in A_in[k]
//       and broadcast to column k two cycles later.
//     C address generator, one per unit: row i of C[in] is read from RF
//       row c + RF_BANKS*i + u in cycle s = i+N+1, added to the partial sums
//       leaving the array by the row-end adders into C_out, and written
//       back to the same RF row in cycle s = i+N+3, in lanes
//       8g..8g+7 (g = c_grp), so four 8-wide blocks of C can share rows. Each RF
//       access is one coalesced row of C.
//   done pulses in the cycle of the last write, M+N+6 cycles after accept;
//   after it the controller accepts the next LSMA. One row of A enters the
//   array per cycle.
// The active mask gives PE(n,k) of a selected unit the bit col_mask[k] (so an
// inner dimension below 8 idles whole columns); units not selected stay in
// SIMD mode. The controller's requests have priority at the banks: it never
// waits.
// Following the paper: LSMA operands (A and C addresses, B, the height of A),
// the active mask, the 8 A address generators on 8 banks, one RF bank per
// unit for C, and the A_in and C_out storage. This design's own: the exact
// cycle schedule, the row-end placement of the C[in] adders (taken from the
// "+" drawn at the end of each row in the paper's dataflow figure), one word
// per A_in / C_out entry, the layout of B and C in the RF and sequential (not
// overlapped) LSMAs.
module systolic_controller
  import sma_pkg::*;
#(
  parameter int unsigned N = ARRAY_N,
  parameter int unsigned U = NUM_UNITS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // LSMA command
  input  logic                    cmd_valid,
  input  lsma_cmd_t               cmd,
  output logic                    cmd_ready,
  output logic                    busy,
  output logic                    done,
  // to the SMA units
  output logic [U-1:0]            unit_sys,     // unit is in systolic mode
  output logic                    unit_en,
  output logic [N*N-1:0]          active_mask,
  output logic [N-1:0][31:0]      a_col,
  input  logic [U-1:0][N-1:0][31:0] psum,
  // shared memory, banks 0..N-1, one read each per cycle, latency 1
  output logic [N-1:0]            sm_rd_en,
  output smem_addr_t [N-1:0]      sm_rd_addr,
  input  logic [N-1:0][31:0]      sm_rd_data,
  // register file, one bank per unit, latency 1
  output logic [U-1:0]            rf_rd_req,
  output rf_addr_t [U-1:0]        rf_rd_addr,
  input  warp_vec_t [U-1:0]       rf_rd_data,
  output logic [U-1:0]            rf_wr_req,
  output rf_addr_t [U-1:0]        rf_wr_addr,
  output warp_vec_t [U-1:0]       rf_wr_data,
  output logic [WARP_SIZE-1:0]    rf_wr_mask,
  // stationary weights to the operand collectors
  output logic [U-1:0]            wt_we,
  output logic                    wt_beat,
  output warp_vec_t [U-1:0]       wt_data
);
  localparam int unsigned SW = HEIGHT_W + 2;

  typedef enum logic [1:0] { S_IDLE, S_WLOAD, S_STREAM } state_e;
  state_e              state;
  lsma_cmd_t           q;
  logic [SW-1:0]       s;
  logic [N-1:0]        a_vld;
  logic [N-1:0][31:0]  a_in;                 // A_in storage
  logic [U-1:0][N-1:0][31:0] c_out;          // C_out storage
  logic [U-1:0][N-1:0][31:0] c_sum;
  logic                c_vld;
  logic [SW-1:0]       m;
  logic                rd_c, mk_c, wr_c;
  logic [SW-1:0]       row_rd, row_wr;

  assign m         = SW'(q.height);
  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);
  assign unit_sys  = busy ? q.unit_mask : '0;
  assign unit_en   = (state == S_STREAM);
  assign a_col     = a_in;
  assign rf_wr_mask = WARP_SIZE'(((64'd1 << N) - 64'd1) << (N * int'(q.c_grp)));

  always_comb begin
    for (int n = 0; n < N; n++)
      for (int k = 0; k < N; k++)
        active_mask[n*N + k] = q.col_mask[k];
  end

  // stream-phase timing
  assign row_rd = s - SW'(N + 1);
  assign row_wr = s - SW'(N + 3);
  assign rd_c   = (state == S_STREAM) && (s >= SW'(N + 1)) && (row_rd < m);
  assign mk_c   = (state == S_STREAM) && (s >= SW'(N + 2)) && (s - SW'(N + 2) < m);
  assign wr_c   = (state == S_STREAM) && c_vld;
  assign done   = (state == S_STREAM) && (s == m + SW'(N + 2));

  // A address generation units
  always_comb begin
    for (int k = 0; k < N; k++) begin
      sm_rd_en[k]   = (state == S_STREAM) && (s >= SW'(k)) && (s - SW'(k) < m);
      sm_rd_addr[k] = q.a_addr + SMEM_AW'(s - SW'(k));
    end
  end

  // C address generation and weight beats, one per unit
  always_comb begin
    for (int u = 0; u < U; u++) begin
      rf_rd_req[u]  = 1'b0;
      rf_rd_addr[u] = '0;
      if (state == S_WLOAD && s < SW'(2)) begin
        rf_rd_req[u]  = q.unit_mask[u];
        rf_rd_addr[u] = q.b_addr + RF_AW'(RF_BANKS) * RF_AW'(s) + RF_AW'(u);
      end else if (rd_c) begin
        rf_rd_req[u]  = q.unit_mask[u];
        rf_rd_addr[u] = q.c_addr + RF_AW'(RF_BANKS) * RF_AW'(row_rd) + RF_AW'(u);
      end
      rf_wr_req[u]  = wr_c && q.unit_mask[u];
      rf_wr_addr[u] = q.c_addr + RF_AW'(RF_BANKS) * RF_AW'(row_wr) + RF_AW'(u);
      rf_wr_data[u] = '0;
      for (int n = 0; n < N; n++) rf_wr_data[u][N * int'(q.c_grp) + n] = c_out[u][n];
      wt_we[u]   = (state == S_WLOAD) && (s >= SW'(1)) && q.unit_mask[u];
      wt_data[u] = rf_rd_data[u];
    end
    wt_beat = (s == SW'(2));
  end

  // row-end adders: C_out = (A x B) row + C[in] row (lane group c_grp)
  logic [U-1:0][N-1:0][31:0] c_in;
  always_comb
    for (int u = 0; u < U; u++)
      for (int n = 0; n < N; n++) c_in[u][n] = rf_rd_data[u][N * int'(q.c_grp) + n];

  for (genvar u = 0; u < U; u++) begin : g_unit
    for (genvar n = 0; n < N; n++) begin : g_row
      fp32_add u_add (.a(psum[u][n]), .b(c_in[u][n]), .y(c_sum[u][n]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      q     <= '0;
      s     <= '0;
      a_vld <= '0;
      a_in  <= '0;
      c_out <= '0;
      c_vld <= 1'b0;
    end else begin
      a_vld <= sm_rd_en;
      for (int k = 0; k < N; k++) a_in[k] <= a_vld[k] ? sm_rd_data[k] : 32'd0;
      c_vld <= mk_c;
      if (mk_c) c_out <= c_sum;
      case (state)
        S_IDLE: if (cmd_valid) begin
          q     <= cmd;
          s     <= '0;
          state <= S_WLOAD;
        end
        S_WLOAD: begin
          if (s == SW'(2)) begin
            s     <= '0;
            state <= S_STREAM;
          end else s <= s + SW'(1);
        end
        S_STREAM: begin
          if (done) state <= S_IDLE;
          s <= s + SW'(1);
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // an LSMA has at least one row and one unit
  a_cmd_ok: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (cmd.height != '0 && cmd.unit_mask != '0));
endmodule
