// tb_operand_collector: checks one operand collector with a register-file
// model that grants reads and writes at random. SIMD: the three source
// rows land in lanes 0..31 of a, b and c, the unit is fired for exactly one
// cycle after the third operand arrived, the write-back carries lanes
// 0..31 of the unit result to row rd, done reports the warp, and with
// grants always given the unit fires 5 cycles after accept. Systolic: two
// weight beats put B[k][n] (element 8k+n of the beats) at PE lane 8n+k.
module tb_operand_collector;
  import sma_pkg::*;
  localparam int N = ARRAY_N;
  logic clk = 0, rst_n = 0;
  logic disp_valid, idle, done, rd_req, rd_gnt, wr_req, wr_gnt, pe_en, wt_we, wt_beat;
  rf_addr_t disp_ra, disp_rb, disp_rc, disp_rd, rd_addr, wr_addr;
  warp_id_t disp_warp, done_warp;
  warp_vec_t rd_data, wr_data, wt_data;
  logic [N*N-1:0] simd_mask;
  logic [N*N-1:0][31:0] a_lane, b_val, c_lane, lane_y;
  int checks = 0, failures = 0;
  int grant_pct = 50;

  operand_collector dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // register-file model: row r lane l holds {r, l} mixed
  function automatic logic [31:0] rfv(input rf_addr_t r, input int l);
    return {5'(l), 16'(r), 11'h5a5} ^ 32'h1234_5678;
  endfunction
  logic rg, wg;
  always @(posedge clk) begin
    rg <= ($urandom % 100) < grant_pct;
    wg <= ($urandom % 100) < grant_pct;
  end
  assign rd_gnt = rd_req && rg;
  assign wr_gnt = wr_req && wg;
  rf_addr_t rd_addr_q;
  always_ff @(posedge clk) rd_addr_q <= rd_addr;
  always_comb for (int l = 0; l < WARP_SIZE; l++) rd_data[l] = rfv(rd_addr_q, l);
  always_comb for (int l = 0; l < N*N; l++) lane_y[l] = 32'hf000_0000 | 32'(l) | {16'd0, 16'(dut.dst)} << 8;

  int fires;
  always @(posedge clk) if (pe_en) fires++;

  initial begin
    rf_addr_t ra, rb, rc, rd;
    int t0, tf;
    disp_valid = 0; disp_ra = '0; disp_rb = '0; disp_rc = '0; disp_rd = '0; disp_warp = '0;
    wt_we = 0; wt_beat = 0; wt_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      grant_pct = (it < 20) ? 100 : 50;
      ra = rf_addr_t'($urandom); rb = rf_addr_t'($urandom); rc = rf_addr_t'($urandom); rd = rf_addr_t'($urandom);
      @(negedge clk);
      chk(idle, "idle before dispatch");
      disp_valid = 1; disp_ra = ra; disp_rb = rb; disp_rc = rc; disp_rd = rd; disp_warp = warp_id_t'(it);
      fires = 0;
      @(negedge clk);
      disp_valid = 0;
      t0 = 1; tf = -1;
      while (!pe_en) begin @(negedge clk); t0++; end
      tf = t0;
      for (int l = 0; l < N*N; l++) begin
        if (l < WARP_SIZE) begin
          chk(a_lane[l] === rfv(ra, l) && b_val[l] === rfv(rb, l) && c_lane[l] === rfv(rc, l),
              $sformatf("operands lane %0d", l));
        end
        chk(simd_mask[l] == (l < WARP_SIZE), "SIMD lane mask");
      end
      if (grant_pct == 100) chk(tf == 5, $sformatf("fire %0d cycles after accept", tf));
      while (!(wr_req && wr_gnt)) @(negedge clk);
      chk(done && done_warp == warp_id_t'(it), "done with warp id");
      chk(wr_addr == rd, "write-back row");
      for (int l = 0; l < WARP_SIZE; l++) chk(wr_data[l] === lane_y[l], "write-back data");
      @(negedge clk);
      chk(fires == 1, "unit fired once");
    end
    // weights
    for (int rep = 0; rep < 10; rep++) begin
      logic [31:0] Bw [N][N];
      for (int h = 0; h < 2; h++) begin
        @(negedge clk);
        wt_we = 1; wt_beat = h[0];
        for (int l = 0; l < WARP_SIZE; l++) begin
          wt_data[l] = $urandom;
          Bw[(32*h+l)/N][(32*h+l)%N] = wt_data[l];
        end
      end
      @(negedge clk);
      wt_we = 0;
      for (int k = 0; k < N; k++) for (int n = 0; n < N; n++)
        chk(b_val[n*N+k] === Bw[k][n], $sformatf("weight PE(%0d,%0d)", n, k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
