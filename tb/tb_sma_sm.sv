// tb_sma_sm: end-to-end test of one SMA streaming multiprocessor at its
// default configuration (64 warps, three 8x8 FP32 units, 96 KB shared
// memory, 256 KB register file).
//
// The program is one step of the double-buffered GEMM that tiles a matrix
// product for this machine: C (128 x 24) += A (128 x 20) x B (20 x 24).
//   loader warps 1..8 copy the three 128 x 8 tiles of A from registers into
//     shared memory with STS (tile kb in rows 256*kb ..);
//   warp 0 issues one LSMA per tile on all three units (an 8 x 24 array) as
//     soon as its tile is in place (the test's front end holds it until
//     then, standing in for the warp-group barrier), the last one with only
//     4 active columns; right after the first it issues a 16-row LSMA on
//     unit 0 alone, which has to wait for the controller; then SYNC;
//   warps 10..13 run FFMA instructions, part of them while unit 0 is in
//     systolic mode and units 1 and 2 are free for SIMD work;
//   warp 20 stores a line and loads it back with LDS while A is streaming.
// The register file is filled and finally read through the host port, and
// every C, FFMA and LDS result is compared with a reference computed by
// the test in double precision, summed in the array's order. Each LSMA must
// take exactly height + 14 cycles from issue to done. Every mechanism
// (mode switches both ways, SIMD and systolic at once, masked columns, LSMA
// waiting for the busy controller, SYNC waiting, LDS held off by the A
// stream, register-bank conflicts, round-robin and GTO issue) is counted
// and must occur.
module tb_sma_sm;
  import sma_pkg::*;
  import fp_ref_pkg::*;
  localparam int W = NUM_WARPS, U = NUM_UNITS, N = ARRAY_N;
  localparam int M = 128, K = 20, NC = N * U, KT = 3;
  localparam int MS = 16;                        // rows of the unit-0-only LSMA
  localparam int C_BASE = 0, B_BASE = 512, BS_BASE = 544, A_RF = 600, C2_BASE = 1024;
  localparam int F_BASE = 1200, LDS_SRC = 1400, LDS_DST = 1500, LDS_ROW = 700;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] instr_valid, instr_take, warp_busy;
  instr_t [W-1:0] instr;
  logic host_wr_req, host_wr_gnt, host_rd_req, host_rd_gnt;
  rf_addr_t host_wr_addr, host_rd_addr;
  warp_vec_t host_wr_data, host_rd_data;
  logic [U-1:0] unit_systolic;
  logic lsma_busy, lsma_done, lsu_stall;

  sma_sm dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ data
  fp32_t A [M][K + 4];     // columns 20..23 are junk that the mask must hide
  fp32_t Bm [K + 4][NC];
  fp32_t Bs [N][N];
  fp32_t Cin [M][NC];
  fp32_t C2in [MS][N];
  logic [31:0] rf_img [RF_ROWS][WARP_SIZE];   // initial register-file image
  logic        rf_set [RF_ROWS];

  // ------------------------------------------------------------ programs
  typedef struct { instr_t i; int need_sts; int need_lsma_started; int need_lsma_done; } item_t;
  item_t prog [W][$];
  int sts_tile [4] = '{0, 0, 0, 0};
  int lsma_started = 0, lsma_finished = 0;

  function automatic instr_t mk(opcode_e op);
    instr_t i = '0;
    i.op = op;
    return i;
  endfunction

  always_comb begin
    for (int w = 0; w < W; w++) begin
      instr_valid[w] = 1'b0;
      instr[w] = '0;
      if (prog[w].size() > 0) begin
        instr[w] = prog[w][0].i;
        instr_valid[w] = (prog[w][0].need_sts < 0 || sts_tile[prog[w][0].need_sts] >= M) &&
                         (lsma_started >= prog[w][0].need_lsma_started) &&
                         (lsma_finished >= prog[w][0].need_lsma_done) && go;
      end
    end
  end
  logic go = 0;

  // ------------------------------------------------------------ monitors
  int n_sys_on = 0, n_sys_off = 0, n_mixed = 0, n_masked = 0, n_lsma_wait = 0;
  int n_sync_wait = 0, n_lds_stall = 0, n_bank_conf = 0, n_rr = 0, n_gto = 0;
  logic [U-1:0] sys_q = '0;
  longint lsma_t0;
  int lsma_h;
  always @(posedge clk) if (rst_n) begin
    for (int u = 0; u < U; u++) begin
      if (unit_systolic[u] && !sys_q[u]) n_sys_on++;
      if (!unit_systolic[u] && sys_q[u]) n_sys_off++;
    end
    sys_q <= unit_systolic;
    if (|unit_systolic && |(~dut.col_idle & ~unit_systolic)) n_mixed++;
    if (lsu_stall) n_lds_stall++;
    if (|(dut.r_req[2*U:U+1] & ~dut.r_gnt[2*U:U+1])) n_bank_conf++;
    if (dut.gv) begin if (lsma_busy) n_rr++; else n_gto++; end
    for (int w = 0; w < W; w++) if (instr_valid[w] && !instr_take[w]) begin
      if (instr[w].op == OP_LSMA && lsma_busy) n_lsma_wait++;
      if (instr[w].op == OP_SYNC) n_sync_wait++;
    end
    for (int w = 0; w < W; w++) if (instr_take[w]) begin
      if (instr[w].op == OP_STS) ;
      if (instr[w].op == OP_LSMA) begin
        lsma_started++;
        lsma_t0 = cycle;
        lsma_h  = int'(instr[w].height);
        if (instr[w].col_mask != '1) n_masked++;
      end
      void'(prog[w].pop_front());
    end
    if (dut.u_lsu.done && dut.u_lsu.state == dut.u_lsu.S_SMWR) sts_tile[int'(dut.u_lsu.row_q) / 256]++;
    if (lsma_done) begin
      lsma_finished++;
      chk(cycle - lsma_t0 == longint'(lsma_h + N + 6), $sformatf("LSMA latency %0d for height %0d",
          cycle - lsma_t0, lsma_h));
    end
  end

  // ------------------------------------------------------------ host port
  task automatic host_write(input int addr, input warp_vec_t d);
    @(negedge clk);
    host_wr_req = 1; host_wr_addr = rf_addr_t'(addr); host_wr_data = d;
    do @(posedge clk); while (!host_wr_gnt);
    #1 host_wr_req = 0;
  endtask

  task automatic host_read(input int addr, output warp_vec_t d);
    @(negedge clk);
    host_rd_req = 1; host_rd_addr = rf_addr_t'(addr);
    do @(posedge clk); while (!host_rd_gnt);
    #1 host_rd_req = 0;
    @(negedge clk);
    d = host_rd_data;
  endtask

  task automatic set_rf(input int row, input int lane, input logic [31:0] v);
    if (!rf_set[row]) begin
      for (int l = 0; l < WARP_SIZE; l++) rf_img[row][l] = $urandom;
      rf_set[row] = 1;
    end
    rf_img[row][lane] = v;
  endtask

  initial begin
    warp_vec_t d;
    instr_t ins;
    fp32_t acc, c;
    host_wr_req = 0; host_rd_req = 0; host_wr_addr = '0; host_rd_addr = '0; host_wr_data = '0;
    for (int r = 0; r < RF_ROWS; r++) rf_set[r] = 0;

    for (int i = 0; i < M; i++) for (int k = 0; k < K + 4; k++) A[i][k] = rand_fp(115, 135);
    for (int k = 0; k < K + 4; k++) for (int n = 0; n < NC; n++) Bm[k][n] = rand_fp(115, 135);
    for (int k = 0; k < N; k++) for (int n = 0; n < N; n++) Bs[k][n] = rand_fp(115, 135);
    for (int i = 0; i < M; i++) for (int n = 0; n < NC; n++) Cin[i][n] = rand_fp(115, 135);
    for (int i = 0; i < MS; i++) for (int n = 0; n < N; n++) C2in[i][n] = rand_fp(115, 135);

    // register-file image
    for (int i = 0; i < M; i++) for (int u = 0; u < U; u++) for (int n = 0; n < N; n++)
      set_rf(C_BASE + 4*i + u, n, Cin[i][8*u+n]);
    for (int kb = 0; kb < KT; kb++) for (int u = 0; u < U; u++) for (int h = 0; h < 2; h++)
      for (int l = 0; l < WARP_SIZE; l++) begin
        automatic int e = 32*h + l;
        set_rf(B_BASE + 8*kb + 4*h + u, l, Bm[8*kb + e/8][8*u + e%8]);
      end
    for (int h = 0; h < 2; h++) for (int l = 0; l < WARP_SIZE; l++)
      set_rf(BS_BASE + 4*h, l, Bs[(32*h+l)/8][(32*h+l)%8]);
    for (int kb = 0; kb < KT; kb++) for (int i = 0; i < M; i++) for (int k = 0; k < N; k++)
      set_rf(A_RF + 128*kb + i, k, A[i][8*kb+k]);
    for (int i = 0; i < MS; i++) for (int n = 0; n < N; n++) set_rf(C2_BASE + 4*i, n, C2in[i][n]);
    for (int r = F_BASE; r < F_BASE + 4*3*12; r++) for (int l = 0; l < WARP_SIZE; l++)
      set_rf(r, l, rand_fp(100, 150));
    for (int l = 0; l < WARP_SIZE; l++) set_rf(LDS_SRC, l, $urandom);

    // programs
    for (int kb = 0; kb < KT; kb++) for (int i = 0; i < M; i++) begin
      ins = mk(OP_STS); ins.ra = rf_addr_t'(A_RF + 128*kb + i); ins.smem = smem_addr_t'(256*kb + i);
      prog[1 + i % 8].push_back('{ins, -1, 0, 0});
    end
    for (int kb = 0; kb < KT; kb++) begin
      ins = mk(OP_LSMA);
      ins.smem = smem_addr_t'(256*kb); ins.rc = rf_addr_t'(C_BASE); ins.rb = rf_addr_t'(B_BASE + 8*kb);
      ins.height = HEIGHT_W'(M); ins.unit_mask = '1;
      ins.col_mask = (kb == KT - 1) ? 8'h0f : 8'hff;
      prog[0].push_back('{ins, kb, 0, 0});
      if (kb == 0) begin
        // the unit-0-only LSMA right behind the first one: it must wait
        ins = mk(OP_LSMA);
        ins.smem = '0; ins.rc = rf_addr_t'(C2_BASE); ins.rb = rf_addr_t'(BS_BASE);
        ins.height = HEIGHT_W'(MS); ins.unit_mask = 3'b001; ins.col_mask = 8'hff;
        prog[0].push_back('{ins, 0, 0, 0});
      end
    end
    prog[0].push_back('{mk(OP_SYNC), -1, 0, 0});
    for (int w = 10; w < 14; w++) for (int j = 0; j < 12; j++) begin
      automatic int base = F_BASE + 12*(w-10)*3 + 3*j;
      ins = mk(OP_FFMA);
      ins.ra = rf_addr_t'(base); ins.rb = rf_addr_t'(base+1); ins.rc = rf_addr_t'(base+2);
      ins.rd = rf_addr_t'(1800 + 12*(w-10) + j);
      // half at once, half once the unit-0-only LSMA has been issued
      prog[w].push_back('{ins, -1, (j < 6) ? 0 : 2, 0});
    end
    ins = mk(OP_STS); ins.ra = rf_addr_t'(LDS_SRC); ins.smem = smem_addr_t'(LDS_ROW);
    prog[20].push_back('{ins, -1, 0, 0});
    ins = mk(OP_LDS); ins.rd = rf_addr_t'(LDS_DST); ins.smem = smem_addr_t'(LDS_ROW);
    prog[20].push_back('{ins, -1, 1, 0});

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < RF_ROWS; r++) if (rf_set[r]) begin
      for (int l = 0; l < WARP_SIZE; l++) d[l] = rf_img[r][l];
      host_write(r, d);
    end
    @(negedge clk);
    go = 1;

    // run until every program is drained and the machine is idle
    begin
      automatic bit busy = 1;
      while (busy) begin
        @(posedge clk);
        busy = lsma_busy || (warp_busy != '0);
        for (int w = 0; w < W; w++) if (prog[w].size() > 0) busy = 1;
      end
    end
    $display("program finished in cycle %0d", cycle);

    // C of the 8 x 24 GEMM
    for (int i = 0; i < M; i++) for (int u = 0; u < U; u++) begin
      host_read(C_BASE + 4*i + u, d);
      for (int n = 0; n < N; n++) begin
        c = Cin[i][8*u+n];
        for (int kb = 0; kb < KT; kb++) begin
          acc = 32'd0;
          for (int k = 0; k < N; k++) if (8*kb + k < K) acc = ref_add(ref_mul(A[i][8*kb+k], Bm[8*kb+k][8*u+n]), acc);
          c = ref_add(acc, c);
        end
        chk(d[n] === c, $sformatf("C[%0d][%0d] = %h, expected %h", i, 8*u+n, d[n], c));
      end
      for (int l = N; l < WARP_SIZE; l++)
        chk(d[l] === rf_img[C_BASE + 4*i + u][l], "C row lanes 8..31 untouched");
    end
    // C of the unit-0-only LSMA
    for (int i = 0; i < MS; i++) begin
      host_read(C2_BASE + 4*i, d);
      for (int n = 0; n < N; n++) begin
        acc = 32'd0;
        for (int k = 0; k < N; k++) acc = ref_add(ref_mul(A[i][k], Bs[k][n]), acc);
        chk(d[n] === ref_add(acc, C2in[i][n]), $sformatf("C2[%0d][%0d]", i, n));
      end
    end
    // FFMA results
    for (int w = 10; w < 14; w++) for (int j = 0; j < 12; j++) begin
      automatic int base = F_BASE + 12*(w-10)*3 + 3*j;
      host_read(1800 + 12*(w-10) + j, d);
      for (int l = 0; l < WARP_SIZE; l++)
        chk(d[l] === ref_add(ref_mul(rf_img[base][l], rf_img[base+1][l]), rf_img[base+2][l]),
            $sformatf("FFMA warp %0d #%0d lane %0d", w, j, l));
    end
    // LDS result
    host_read(LDS_DST, d);
    for (int l = 0; l < WARP_SIZE; l++) chk(d[l] === rf_img[LDS_SRC][l], "LDS data");

    $display("mechanisms: to_systolic=%0d to_simd=%0d simd+systolic=%0d masked_lsma=%0d lsma_wait=%0d",
             n_sys_on, n_sys_off, n_mixed, n_masked, n_lsma_wait);
    $display("            sync_wait=%0d lds_stall=%0d bank_conflict=%0d rr_issue=%0d gto_issue=%0d lsma=%0d",
             n_sync_wait, n_lds_stall, n_bank_conf, n_rr, n_gto, lsma_finished);
    chk(n_sys_on > 0, "switch to systolic mode");
    chk(n_sys_off > 0, "switch back to SIMD mode");
    chk(n_mixed > 0, "SIMD and systolic at once");
    chk(n_masked > 0, "masked columns");
    chk(n_lsma_wait > 0, "LSMA waiting for the controller");
    chk(n_sync_wait > 0, "SYNC waiting");
    chk(n_lds_stall > 0, "LDS held off by the A stream");
    chk(n_bank_conf > 0, "register-bank conflict");
    chk(n_rr > 0, "round-robin issue");
    chk(n_gto > 0, "GTO issue");
    chk(lsma_finished == KT + 1, "all LSMAs completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
