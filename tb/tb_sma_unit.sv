// tb_sma_unit: checks the 8x8 unit at its default size. Systolic mode: random
// stationary weights, PE(n,k) = B[k][n]; row i of A is presented skewed
// (A[i][k] on column k in cycle i+k) and psum_out must equal the row of
// A x B, summed in column order, exactly N clock edges after A[i][0]
// entered. A second pass idles two columns through the active mask. SIMD
// mode: all 64 lanes compute a*b+c independently.
module tb_sma_unit;
  import sma_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = ARRAY_N;
  localparam int M = 24;
  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic en;
  logic [N*N-1:0] active_mask;
  logic [N*N-1:0][31:0] b, a_lane, c_lane, lane_y;
  logic [N-1:0][31:0] a_col, psum_out;
  int checks = 0, failures = 0;
  fp32_t A [M][N];
  fp32_t B [N][N];

  sma_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp32_t ref_row(input int i, input int n, input logic [N-1:0] cm);
    fp32_t acc = 32'd0;
    for (int k = 0; k < N; k++) if (cm[k]) acc = ref_add(ref_mul(A[i][k], B[k][n]), acc);
    return acc;
  endfunction

  task automatic run_systolic(input logic [N-1:0] cm);
    mode = MODE_SYSTOLIC;
    for (int n = 0; n < N; n++)
      for (int k = 0; k < N; k++) begin
        b[n*N+k] = B[k][n];
        active_mask[n*N+k] = cm[k];
      end
    for (int t = 0; t < M + N; t++) begin
      @(negedge clk);
      en = 1;
      for (int k = 0; k < N; k++)
        a_col[k] = (t - k >= 0 && t - k < M) ? A[t-k][k] : 32'd0;
      @(posedge clk);
      #1;
      // row i entered column 0 in cycle i; after N edges it leaves row ends
      if (t - (N - 1) >= 0 && t - (N - 1) < M) begin
        for (int n = 0; n < N; n++) begin
          checks++;
          if (psum_out[n] !== ref_row(t - (N - 1), n, cm)) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d col %0d: %h vs %h", t-(N-1), n,
                                        psum_out[n], ref_row(t-(N-1), n, cm));
          end
        end
      end
    end
  endtask

  initial begin
    mode = MODE_SIMD; en = 0; active_mask = '1;
    b = '0; a_lane = '0; c_lane = '0; a_col = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < M; i++) for (int k = 0; k < N; k++) A[i][k] = rand_fp(110, 140);
    for (int k = 0; k < N; k++) for (int n = 0; n < N; n++) B[k][n] = rand_fp(110, 140);
    run_systolic('1);
    run_systolic(8'b1101_0111);
    // SIMD mode
    for (int rep = 0; rep < 20; rep++) begin
      @(negedge clk);
      mode = MODE_SIMD; en = 1; active_mask = '1;
      for (int l = 0; l < N*N; l++) begin
        a_lane[l] = rand_fp(100, 150); b[l] = rand_fp(100, 150); c_lane[l] = rand_fp(100, 150);
      end
      @(posedge clk);
      #1;
      for (int l = 0; l < N*N; l++) begin
        checks++;
        if (lane_y[l] !== ref_add(ref_mul(a_lane[l], b[l]), c_lane[l])) begin
          failures++;
          if (failures < 10) $display("FAIL simd lane %0d", l);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
