// tb_sma_warp_scheduler: drives random ready masks (sparse and dense) in both
// modes and compares every grant with a reference model of the two
// policies: greedy-then-oldest (stay on the last warp while ready, else the
// lowest ready index) and round-robin (first ready warp after the last one).
// Also checks that in round-robin mode every ready warp is served within W
// grants when all stay ready (no starvation), where GTO serves only one.
module tb_sma_warp_scheduler;
  import sma_pkg::*;
  localparam int W = NUM_WARPS;
  logic clk = 0, rst_n = 0, sys_mode, grant_valid;
  logic [W-1:0] ready;
  logic [$clog2(W)-1:0] grant_id;
  int checks = 0, failures = 0;

  sma_warp_scheduler dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int last = 0, e;
    bit seen [W];
    sys_mode = 0; ready = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      sys_mode = (c / 500) % 2;
      for (int w = 0; w < W; w++) ready[w] = ((c % 3) == 0) ? ($urandom % 2) : (($urandom % 16) == 0);
      if ((c % 7) == 0) ready[last] = 1'b1;
      #1;
      e = -1;
      if (!sys_mode && ready[last]) e = last;
      else if (!sys_mode) begin for (int w = W - 1; w >= 0; w--) if (ready[w]) e = w; end
      else for (int i = W; i >= 1; i--) if (ready[(last + i) % W]) e = (last + i) % W;
      chk(grant_valid == (e >= 0), "grant_valid");
      if (e >= 0) begin
        chk(int'(grant_id) == e, $sformatf("grant %0d expected %0d (mode %0d)", grant_id, e, sys_mode));
        last = e;
      end
    end
    // fairness: all warps ready for W cycles
    for (int m = 0; m < 2; m++) begin
      automatic int distinct = 0;
      for (int w = 0; w < W; w++) seen[w] = 0;
      for (int c = 0; c < W; c++) begin
        @(negedge clk);
        sys_mode = m; ready = '1;
        #1 seen[grant_id] = 1;
      end
      for (int w = 0; w < W; w++) distinct += seen[w];
      chk(distinct == ((m == 1) ? W : 1), $sformatf("mode %0d served %0d warps", m, distinct));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
