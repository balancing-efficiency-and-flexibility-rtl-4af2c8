// tb_register_file: checks the banked register file at its default size
// (4 banks x 512 rows x 32 lanes): full-row writes and reads on every bank
// in the same cycle, lane-masked writes leaving other lanes intact, and the
// one-cycle read latency, against a copy kept by the testbench.
module tb_register_file;
  import sma_pkg::*;
  localparam int B = RF_BANKS, R = RF_BANK_ROWS, RW = $clog2(RF_BANK_ROWS);
  logic clk = 0;
  logic [B-1:0] rd_en, wr_en;
  logic [B-1:0][RW-1:0] rd_row, wr_row;
  logic [B-1:0][WARP_SIZE-1:0] wr_mask;
  warp_vec_t [B-1:0] rd_data, wr_data;
  int checks = 0, failures = 0;
  logic [31:0] shadow [B][R][WARP_SIZE];
  logic        known  [B][R];

  register_file dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [B-1:0][RW-1:0] last_row;
    logic [B-1:0] last_en;
    rd_en = '0; wr_en = '0; rd_row = '0; wr_row = '0; wr_mask = '0; wr_data = '0;
    // fill every row once
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      wr_en = '1;
      for (int bk = 0; bk < B; bk++) begin
        wr_row[bk] = RW'(r); wr_mask[bk] = '1;
        for (int l = 0; l < WARP_SIZE; l++) begin
          wr_data[bk][l] = $urandom;
          shadow[bk][r][l] = wr_data[bk][l];
        end
      end
    end
    last_en = '0; last_row = '0;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // check reads issued in the previous cycle (shadow taken before that cycle's writes)
      for (int bk = 0; bk < B; bk++) if (last_en[bk]) begin
        checks++;
        for (int l = 0; l < WARP_SIZE; l++)
          if (rd_data[bk][l] !== shadow[bk][last_row[bk]][l]) begin
            failures++;
            if (failures < 10) $display("FAIL bank %0d row %0d lane %0d", bk, last_row[bk], l);
            break;
          end
      end
      // commit the writes of the previous cycle into the shadow
      for (int bk = 0; bk < B; bk++) if (wr_en[bk])
        for (int l = 0; l < WARP_SIZE; l++)
          if (wr_mask[bk][l]) shadow[bk][wr_row[bk]][l] = wr_data[bk][l];
      rd_en = B'($urandom); wr_en = B'($urandom);
      for (int bk = 0; bk < B; bk++) begin
        rd_row[bk] = RW'($urandom % R);
        wr_row[bk] = (c % 3 == 0) ? rd_row[bk] : RW'($urandom % R);
        wr_mask[bk] = $urandom;
        for (int l = 0; l < WARP_SIZE; l++) wr_data[bk][l] = $urandom;
      end
      last_en = rd_en; last_row = rd_row;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
