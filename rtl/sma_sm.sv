// sma_sm: one SMA streaming multiprocessor, the top of the design.
//
// Three 8x8 SMA units of FP32 PEs are, each on its own, either 64 SIMD lanes
// or a systolic array. Warps issue one instruction per cycle, chosen by the
// warp scheduler:
//   FFMA  goes to the operand collector of a unit that is in SIMD mode and
//         free; it executes on lanes 0..31 of that unit and writes back.
//   STS / LDS go to the load/store path between register file and shared
//         memory.
//   LSMA  goes to the systolic controller, which switches the units named in
//         its unit mask to systolic mode for the duration of the instruction
//         and switches them back afterwards; the other units keep running
//         SIMD instructions meanwhile. LSMA is asynchronous: the issuing warp
//         may go on at once.
//   SYNC  issues only when no LSMA is in flight; it is the explicit
//         synchronisation a warp needs before reading LSMA results.
// A warp with an FFMA, STS or LDS in flight does not issue again until it
// completes (a one-instruction-per-warp scoreboard). While an LSMA runs the
// scheduler is round-robin, otherwise greedy-then-oldest.
//
// Register-file banks are arbitrated per bank and cycle with fixed
// priority: systolic controller, load/store path, operand collectors 0..2,
// host port. The controller always wins (its streams cannot wait), and the
// mapping of C and B rows puts its three units in three different banks.
//
// Outside the SM: the instruction front end (fetch, instruction cache,
// decode) is represented by the per-warp instr/instr_valid/instr_take
// handshake, and global memory by the host port into the register file.
//
// Follows the paper: three 8x8 FP32 SMA units per SM, temporal switching
// between SIMD and systolic mode on the same PEs, the LSMA instruction and
// its asynchronous execution with explicit sync, the systolic controller,
// 8 of the 32 shared-memory banks feeding A, one RF bank per unit for C, the
// round-robin scheduler in systolic mode. This design's own: the instruction
// set and encoding beyond LSMA, the scoreboard, the arbitration, the host
// port and all cycle timing.
module sma_sm
  import sma_pkg::*;
#(
  parameter int unsigned W = NUM_WARPS,
  parameter int unsigned U = NUM_UNITS,
  parameter int unsigned N = ARRAY_N
) (
  input  logic                clk,
  input  logic                rst_n,
  // instruction front end, one slot per warp
  input  logic [W-1:0]        instr_valid,
  input  instr_t [W-1:0]      instr,
  output logic [W-1:0]        instr_take,
  // host access to the register file (stands for global-memory traffic)
  input  logic                host_wr_req,
  input  rf_addr_t            host_wr_addr,
  input  warp_vec_t           host_wr_data,
  output logic                host_wr_gnt,
  input  logic                host_rd_req,
  input  rf_addr_t            host_rd_addr,
  output logic                host_rd_gnt,
  output warp_vec_t           host_rd_data,   // cycle after host_rd_gnt
  // status
  output logic [U-1:0]        unit_systolic,
  output logic                lsma_busy,
  output logic                lsma_done,
  output logic [W-1:0]        warp_busy,
  output logic                lsu_stall       // LDS/STS waiting for a port
);
  localparam int unsigned NR = 2 * U + 2;   // RF requesters
  localparam int unsigned R_LSU  = U;
  localparam int unsigned R_COL  = U + 1;
  localparam int unsigned R_HOST = 2 * U + 1;
  localparam int unsigned BROW_W = RF_AW - RF_BW;

  // ------------------------------------------------------------ scheduler
  logic [W-1:0] ready;
  logic         gv;
  logic [$clog2(W)-1:0] gid;
  instr_t       gi;

  logic [U-1:0] col_idle, col_done, col_disp;
  warp_id_t [U-1:0] col_done_warp;
  logic         lsu_idle, lsu_done, lsu_disp, lsu_stalled;
  warp_id_t     lsu_done_warp;
  logic         ctl_ready, ctl_busy, ctl_done, ctl_valid;
  logic [U-1:0] col_free;
  logic         any_free;
  int unsigned  free_u;

  always_comb begin
    col_free = col_idle & ~unit_systolic;
    any_free = |col_free;
    free_u   = 0;
    for (int u = U - 1; u >= 0; u--) if (col_free[u]) free_u = u;
  end

  function automatic logic can_issue(input instr_t i);
    case (i.op)
      OP_NOP:  return 1'b1;
      OP_FFMA: return any_free;
      OP_STS, OP_LDS: return lsu_idle;
      OP_LSMA: return ctl_ready && ((i.unit_mask & ~col_idle) == '0);
      OP_SYNC: return !ctl_busy;
      default: return 1'b1;
    endcase
  endfunction

  always_comb begin
    for (int w = 0; w < W; w++)
      ready[w] = instr_valid[w] && !warp_busy[w] && can_issue(instr[w]);
  end

  sma_warp_scheduler #(.W(W)) u_sched (
    .clk(clk), .rst_n(rst_n), .sys_mode(ctl_busy),
    .ready(ready), .grant_valid(gv), .grant_id(gid)
  );

  assign gi = instr[gid];
  always_comb begin
    instr_take = '0;
    if (gv) instr_take[gid] = 1'b1;
  end
  assign lsu_disp  = gv && (gi.op == OP_STS || gi.op == OP_LDS);
  assign ctl_valid = gv && (gi.op == OP_LSMA);
  always_comb begin
    col_disp = '0;
    if (gv && gi.op == OP_FFMA) col_disp[free_u] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) warp_busy <= '0;
    else begin
      for (int u = 0; u < U; u++) if (col_done[u]) warp_busy[col_done_warp[u]] <= 1'b0;
      if (lsu_done) warp_busy[lsu_done_warp] <= 1'b0;
      if (gv && (gi.op == OP_FFMA || gi.op == OP_STS || gi.op == OP_LDS))
        warp_busy[gid] <= 1'b1;
    end
  end

  // ------------------------------------------------------------ RF arbitration
  logic [NR-1:0]           r_req, r_gnt, w_req, w_gnt;
  rf_addr_t [NR-1:0]       r_addr, w_addr;
  warp_vec_t [NR-1:0]      w_data, r_data;
  logic [NR-1:0][WARP_SIZE-1:0] w_mask;
  logic [NR-1:0][RF_BW-1:0] r_bank_q;

  logic [RF_BANKS-1:0]                rf_rd_en, rf_wr_en;
  logic [RF_BANKS-1:0][BROW_W-1:0]    rf_rd_row, rf_wr_row;
  logic [RF_BANKS-1:0][WARP_SIZE-1:0] rf_wr_mask;
  warp_vec_t [RF_BANKS-1:0]           rf_rd_data, rf_wr_data;

  always_comb begin
    r_gnt = '0; w_gnt = '0;
    rf_rd_en = '0; rf_rd_row = '0; rf_wr_en = '0; rf_wr_row = '0;
    rf_wr_mask = '0; rf_wr_data = '0;
    for (int bk = 0; bk < RF_BANKS; bk++) begin
      for (int r = 0; r < NR; r++) begin
        if (!rf_rd_en[bk] && r_req[r] && int'(r_addr[r][RF_BW-1:0]) == bk) begin
          rf_rd_en[bk]  = 1'b1;
          rf_rd_row[bk] = r_addr[r][RF_AW-1:RF_BW];
          r_gnt[r]      = 1'b1;
        end
        if (!rf_wr_en[bk] && w_req[r] && int'(w_addr[r][RF_BW-1:0]) == bk) begin
          rf_wr_en[bk]   = 1'b1;
          rf_wr_row[bk]  = w_addr[r][RF_AW-1:RF_BW];
          rf_wr_mask[bk] = w_mask[r];
          rf_wr_data[bk] = w_data[r];
          w_gnt[r]       = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_bank_q <= '0;
    else for (int r = 0; r < NR; r++) if (r_gnt[r]) r_bank_q[r] <= r_addr[r][RF_BW-1:0];
  end
  always_comb for (int r = 0; r < NR; r++) r_data[r] = rf_rd_data[r_bank_q[r]];

  register_file u_rf (
    .clk(clk), .rd_en(rf_rd_en), .rd_row(rf_rd_row), .rd_data(rf_rd_data),
    .wr_en(rf_wr_en), .wr_row(rf_wr_row), .wr_mask(rf_wr_mask), .wr_data(rf_wr_data)
  );

  // ------------------------------------------------------------ shared memory
  logic        sm_rd_req, sm_rd_gnt, sm_wr_en;
  smem_addr_t  sm_rd_row, sm_wr_row;
  warp_vec_t   sm_rd_data, sm_wr_data;
  logic [N-1:0]         sa_en;
  smem_addr_t [N-1:0]   sa_row;
  logic [N-1:0][31:0]   sa_data;

  shared_memory u_smem (
    .clk(clk),
    .line_rd_req(sm_rd_req), .line_rd_row(sm_rd_row), .line_rd_gnt(sm_rd_gnt),
    .line_rd_data(sm_rd_data),
    .line_wr_en(sm_wr_en), .line_wr_row(sm_wr_row), .line_wr_data(sm_wr_data),
    .sa_rd_en(sa_en), .sa_rd_row(sa_row), .sa_rd_data(sa_data)
  );

  // ------------------------------------------------------------ systolic controller
  lsma_cmd_t                 cmd;
  logic                      ctl_unit_en;
  logic [N*N-1:0]            ctl_mask;
  logic [N-1:0][31:0]        a_col;
  logic [U-1:0][N-1:0][31:0] psum;
  logic [U-1:0]              c_rd_req, c_wr_req, wt_we;
  rf_addr_t [U-1:0]          c_rd_addr, c_wr_addr;
  warp_vec_t [U-1:0]         c_rd_data, c_wr_data, wt_data;
  logic [WARP_SIZE-1:0]      c_wr_mask;
  logic                      wt_beat;

  assign cmd.a_addr    = gi.smem;
  assign cmd.c_addr    = gi.rc;
  assign cmd.b_addr    = gi.rb;
  assign cmd.height    = gi.height;
  assign cmd.unit_mask = gi.unit_mask;
  assign cmd.col_mask  = gi.col_mask;
  assign cmd.c_grp     = gi.c_grp;

  systolic_controller #(.N(N), .U(U)) u_ctl (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(ctl_valid), .cmd(cmd), .cmd_ready(ctl_ready), .busy(ctl_busy), .done(ctl_done),
    .unit_sys(unit_systolic), .unit_en(ctl_unit_en), .active_mask(ctl_mask),
    .a_col(a_col), .psum(psum),
    .sm_rd_en(sa_en), .sm_rd_addr(sa_row), .sm_rd_data(sa_data),
    .rf_rd_req(c_rd_req), .rf_rd_addr(c_rd_addr), .rf_rd_data(c_rd_data),
    .rf_wr_req(c_wr_req), .rf_wr_addr(c_wr_addr), .rf_wr_data(c_wr_data), .rf_wr_mask(c_wr_mask),
    .wt_we(wt_we), .wt_beat(wt_beat), .wt_data(wt_data)
  );
  assign lsma_busy = ctl_busy;
  assign lsu_stall = lsu_stalled;
  assign lsma_done = ctl_done;

  // ------------------------------------------------------------ load/store path
  logic       l_rd_req, l_wr_req;
  rf_addr_t   l_rd_addr, l_wr_addr;
  warp_vec_t  l_wr_data;

  sma_lsu u_lsu (
    .clk(clk), .rst_n(rst_n),
    .disp_valid(lsu_disp), .disp_is_lds(gi.op == OP_LDS),
    .disp_reg(gi.op == OP_LDS ? gi.rd : gi.ra), .disp_row(gi.smem), .disp_warp(warp_id_t'(gid)),
    .idle(lsu_idle), .done(lsu_done), .done_warp(lsu_done_warp), .stalled(lsu_stalled),
    .rd_req(l_rd_req), .rd_addr(l_rd_addr), .rd_gnt(r_gnt[R_LSU]), .rd_data(r_data[R_LSU]),
    .wr_req(l_wr_req), .wr_addr(l_wr_addr), .wr_data(l_wr_data), .wr_gnt(w_gnt[R_LSU]),
    .sm_rd_req(sm_rd_req), .sm_rd_row(sm_rd_row), .sm_rd_gnt(sm_rd_gnt), .sm_rd_data(sm_rd_data),
    .sm_wr_en(sm_wr_en), .sm_wr_row(sm_wr_row), .sm_wr_data(sm_wr_data)
  );

  // ------------------------------------------------------------ units and collectors
  logic [U-1:0]       o_rd_req, o_wr_req;
  rf_addr_t [U-1:0]   o_rd_addr, o_wr_addr;
  warp_vec_t [U-1:0]  o_wr_data;

  for (genvar u = 0; u < U; u++) begin : g_unit
    logic                 pe_en;
    logic [N*N-1:0]       simd_mask;
    logic [N*N-1:0][31:0] a_lane, b_val, c_lane, lane_y;

    operand_collector #(.N(N)) u_col (
      .clk(clk), .rst_n(rst_n),
      .disp_valid(col_disp[u]), .disp_ra(gi.ra), .disp_rb(gi.rb), .disp_rc(gi.rc),
      .disp_rd(gi.rd), .disp_warp(warp_id_t'(gid)),
      .idle(col_idle[u]), .done(col_done[u]), .done_warp(col_done_warp[u]),
      .rd_req(o_rd_req[u]), .rd_addr(o_rd_addr[u]), .rd_gnt(r_gnt[R_COL + u]),
      .rd_data(r_data[R_COL + u]),
      .wr_req(o_wr_req[u]), .wr_addr(o_wr_addr[u]), .wr_data(o_wr_data[u]),
      .wr_gnt(w_gnt[R_COL + u]),
      .pe_en(pe_en), .simd_mask(simd_mask), .a_lane(a_lane), .b_val(b_val), .c_lane(c_lane),
      .lane_y(lane_y),
      .wt_we(wt_we[u]), .wt_beat(wt_beat), .wt_data(wt_data[u])
    );

    sma_unit #(.N(N)) u_unit (
      .clk(clk), .rst_n(rst_n),
      .mode(unit_systolic[u] ? MODE_SYSTOLIC : MODE_SIMD),
      .en(unit_systolic[u] ? ctl_unit_en : pe_en),
      .active_mask(unit_systolic[u] ? ctl_mask : simd_mask),
      .b(b_val), .a_lane(a_lane), .c_lane(c_lane), .a_col(a_col),
      .lane_y(lane_y), .psum_out(psum[u])
    );

    assign c_rd_data[u] = r_data[u];
  end

  // requester table: 0..U-1 controller, U load/store, U+1..2U collectors, 2U+1 host
  always_comb begin
    for (int u = 0; u < U; u++) begin
      r_req[u] = c_rd_req[u];  r_addr[u] = c_rd_addr[u];
      w_req[u] = c_wr_req[u];  w_addr[u] = c_wr_addr[u];
      w_data[u] = c_wr_data[u]; w_mask[u] = c_wr_mask;
      r_req[R_COL + u] = o_rd_req[u];  r_addr[R_COL + u] = o_rd_addr[u];
      w_req[R_COL + u] = o_wr_req[u];  w_addr[R_COL + u] = o_wr_addr[u];
      w_data[R_COL + u] = o_wr_data[u]; w_mask[R_COL + u] = '1;
    end
    r_req[R_LSU] = l_rd_req;  r_addr[R_LSU] = l_rd_addr;
    w_req[R_LSU] = l_wr_req;  w_addr[R_LSU] = l_wr_addr;
    w_data[R_LSU] = l_wr_data; w_mask[R_LSU] = '1;
    r_req[R_HOST] = host_rd_req; r_addr[R_HOST] = host_rd_addr;
    w_req[R_HOST] = host_wr_req; w_addr[R_HOST] = host_wr_addr;
    w_data[R_HOST] = host_wr_data; w_mask[R_HOST] = '1;
  end
  assign host_rd_gnt  = r_gnt[R_HOST];
  assign host_wr_gnt  = w_gnt[R_HOST];
  assign host_rd_data = r_data[R_HOST];

  // the systolic controller's register-file accesses are never refused
  a_ctl_rd: assert property (@(posedge clk) disable iff (!rst_n) (r_req[U-1:0] & ~r_gnt[U-1:0]) == '0);
  a_ctl_wr: assert property (@(posedge clk) disable iff (!rst_n) (w_req[U-1:0] & ~w_gnt[U-1:0]) == '0);
endmodule
