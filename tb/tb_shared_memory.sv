// tb_shared_memory: checks the 32-bank shared memory at its default size:
// line writes and reads, systolic reads of a different row in each of banks
// 0..7 in one cycle, a line read held off (no grant) while systolic reads
// are active, the write port still working then, and one-cycle latency.
module tb_shared_memory;
  import sma_pkg::*;
  localparam int BK = SMEM_BANKS, R = SMEM_ROWS, SB = SMA_BANKS;
  logic clk = 0;
  logic line_rd_req, line_rd_gnt, line_wr_en;
  smem_addr_t line_rd_row, line_wr_row;
  logic [BK-1:0][31:0] line_rd_data, line_wr_data;
  logic [SB-1:0] sa_rd_en;
  smem_addr_t [SB-1:0] sa_rd_row;
  logic [SB-1:0][31:0] sa_rd_data;
  int checks = 0, failures = 0;
  logic [31:0] shadow [BK][R];

  shared_memory dut (.*);
  always #5 clk = ~clk;

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

  initial begin
    logic prev_line, prev_sa_any;
    smem_addr_t prev_row;
    logic [SB-1:0] prev_sa;
    smem_addr_t [SB-1:0] prev_sa_row;
    line_rd_req = 0; line_wr_en = 0; sa_rd_en = '0; line_rd_row = '0; line_wr_row = '0;
    line_wr_data = '0; sa_rd_row = '0;
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      line_wr_en = 1; line_wr_row = smem_addr_t'(r);
      for (int b = 0; b < BK; b++) begin line_wr_data[b] = $urandom; shadow[b][r] = line_wr_data[b]; end
    end
    prev_line = 0; prev_sa = '0; prev_row = '0; prev_sa_row = '0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (prev_line) for (int b = 0; b < BK; b++)
        chk(line_rd_data[b] === shadow[b][prev_row], "line read data");
      for (int k = 0; k < SB; k++) if (prev_sa[k])
        chk(sa_rd_data[k] === shadow[k][prev_sa_row[k]], "systolic read data");
      if (line_wr_en) for (int b = 0; b < BK; b++) shadow[b][line_wr_row] = line_wr_data[b];
      line_rd_req = $urandom % 2;
      line_rd_row = smem_addr_t'($urandom % R);
      sa_rd_en    = (c % 2) ? SB'($urandom) : '0;
      for (int k = 0; k < SB; k++) sa_rd_row[k] = smem_addr_t'($urandom % R);
      line_wr_en  = $urandom % 2;
      line_wr_row = smem_addr_t'($urandom % R);
      for (int b = 0; b < BK; b++) line_wr_data[b] = $urandom;
      #1;
      chk(line_rd_gnt == (line_rd_req && sa_rd_en == '0), "line read grant");
      prev_line = line_rd_gnt; prev_row = line_rd_row;
      prev_sa = sa_rd_en; prev_sa_row = sa_rd_row;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
