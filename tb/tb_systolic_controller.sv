// tb_systolic_controller: runs LSMA commands through the controller with
// three real SMA units, a shared-memory model and a register-file model kept
// by the test. Checks C[out] = A x B + C[in] for every selected unit, summed
// in the array's order, C rows of unselected units and lanes 8..31
// outside the selected lane group untouched, unit_sys only on selected units while busy, masked columns
// left out, and the latency of height + 14 cycles from accept to done.
// Cases: 128 rows on all three units, 5 rows on unit 1 with four columns
// masked off, 1 row on units 0 and 2.
module tb_systolic_controller;
  import sma_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = ARRAY_N, U = NUM_UNITS;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done, unit_en, wt_beat;
  lsma_cmd_t cmd;
  logic [U-1:0] unit_sys, rf_rd_req, rf_wr_req, wt_we;
  logic [N*N-1:0] active_mask;
  logic [N-1:0][31:0] a_col;
  logic [U-1:0][N-1:0][31:0] psum;
  logic [N-1:0] sm_rd_en;
  smem_addr_t [N-1:0] sm_rd_addr;
  logic [N-1:0][31:0] sm_rd_data;
  rf_addr_t [U-1:0] rf_rd_addr, rf_wr_addr;
  warp_vec_t [U-1:0] rf_rd_data, rf_wr_data, wt_data;
  logic [WARP_SIZE-1:0] rf_wr_mask;
  int checks = 0, failures = 0;

  systolic_controller dut (.*);
  always #5 clk = ~clk;

  // memories of the test
  logic [31:0] sm [N][SMEM_ROWS];
  logic [31:0] rf [RF_ROWS][WARP_SIZE];
  logic [U-1:0][N*N-1:0][31:0] wts;
  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) if (sm_rd_en[k]) sm_rd_data[k] <= sm[k][sm_rd_addr[k]];
    for (int u = 0; u < U; u++) begin
      if (rf_rd_req[u]) for (int l = 0; l < WARP_SIZE; l++) rf_rd_data[u][l] <= rf[rf_rd_addr[u]][l];
      if (rf_wr_req[u]) for (int l = 0; l < WARP_SIZE; l++)
        if (rf_wr_mask[l]) rf[rf_wr_addr[u]][l] <= rf_wr_data[u][l];
      if (wt_we[u]) for (int l = 0; l < WARP_SIZE; l++) begin
        automatic int e = 32 * int'(wt_beat) + l;
        wts[u][(e % N) * N + e / N] <= wt_data[u][l];
      end
    end
  end

  for (genvar u = 0; u < U; u++) begin : g_u
    logic [N*N-1:0][31:0] lane_y;
    sma_unit u_unit (.clk(clk), .rst_n(rst_n),
      .mode(unit_sys[u] ? MODE_SYSTOLIC : MODE_SIMD), .en(unit_sys[u] && unit_en),
      .active_mask(active_mask), .b(wts[u]), .a_lane('0), .c_lane('0), .a_col(a_col),
      .lane_y(lane_y), .psum_out(psum[u]));
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic run(input int m, input logic [U-1:0] um, input logic [N-1:0] cm,
                     input int a_addr, input int c_addr, input int b_addr, input int g);
    logic [31:0] c0 [RF_ROWS][WARP_SIZE];
    int t;
    fp32_t acc;
    for (int i = 0; i < m; i++) for (int k = 0; k < N; k++) sm[k][a_addr + i] = rand_fp(115, 135);
    for (int r = 0; r < 8; r++) for (int l = 0; l < WARP_SIZE; l++) rf[b_addr + r][l] = rand_fp(115, 135);
    for (int i = 0; i < m; i++) for (int u = 0; u < 4; u++) for (int l = 0; l < WARP_SIZE; l++)
      rf[c_addr + 4*i + u][l] = rand_fp(115, 135);
    c0 = rf;
    @(negedge clk);
    cmd_valid = 1;
    cmd.a_addr = smem_addr_t'(a_addr); cmd.c_addr = rf_addr_t'(c_addr); cmd.b_addr = rf_addr_t'(b_addr);
    cmd.height = HEIGHT_W'(m); cmd.unit_mask = um; cmd.col_mask = cm; cmd.c_grp = LGRP_W'(g);
    chk(cmd_ready, "ready when idle");
    @(negedge clk);
    cmd_valid = 0;
    t = 1;
    while (!done) begin
      chk(busy && unit_sys == um, "unit_sys while busy");
      @(negedge clk); t++;
    end
    chk(t == m + N + 6, $sformatf("latency %0d for %0d rows", t, m));
    @(negedge clk);
    chk(!busy && unit_sys == '0, "idle after done");
    for (int i = 0; i < m; i++) for (int u = 0; u < U; u++) for (int l = 0; l < WARP_SIZE; l++) begin
      automatic int row = c_addr + 4*i + u;
      if (um[u] && l >= 8*g && l < 8*g + N) begin
        acc = 32'd0;
        for (int k = 0; k < N; k++) if (cm[k]) begin
          automatic int e = 8*k + (l - 8*g);   // B[k][n] of unit u: element 8k+n of rows b+u, b+4+u
          acc = ref_add(ref_mul(sm[k][a_addr + i], c0[b_addr + 4*(e/32) + u][e%32]), acc);
        end
        chk(rf[row][l] === ref_add(acc, c0[row][l]), $sformatf("C row %0d unit %0d col %0d", i, u, l));
      end else
        chk(rf[row][l] === c0[row][l], "untouched");
    end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; wts = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(128, 3'b111, 8'hff, 0, 0, 1024, 0);
    run(5, 3'b010, 8'b1010_0101, 300, 600, 1100, 2);
    run(1, 3'b101, 8'hff, 767, 1200, 1300, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
