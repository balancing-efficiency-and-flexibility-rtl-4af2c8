// register_file: the SM's banked vector register file.
//
// BANKS banks of BANK_ROWS rows; a row is one warp register, 32 lanes x 32
// bits (4 banks x 512 rows x 128 B = 256 KB by default). Flat row address a
// lives in bank a % BANKS, row a / BANKS, so consecutive registers fall in
// different banks. Every bank has one read port and one write port per
// cycle; writes carry a lane mask (the systolic controller writes lanes
// 0..7 of a row, one row of an 8-wide C block).
// The 256 KB size and the 32 x 32-bit row are the paper's; the bank count,
// the address interleaving and the port structure are this design's. Bank
// arbitration is done by the SM around this module.
//
// Timing: a read in cycle t returns its row in cycle t+1; a write in cycle
// t is visible to reads from cycle t+1 (no write-to-read bypass).
module register_file
  import sma_pkg::*;
#(
  parameter int unsigned BANKS     = RF_BANKS,
  parameter int unsigned BANK_ROWS = RF_BANK_ROWS
) (
  input  logic                              clk,
  input  logic [BANKS-1:0]                  rd_en,
  input  logic [BANKS-1:0][$clog2(BANK_ROWS)-1:0] rd_row,
  output warp_vec_t [BANKS-1:0]             rd_data,
  input  logic [BANKS-1:0]                  wr_en,
  input  logic [BANKS-1:0][$clog2(BANK_ROWS)-1:0] wr_row,
  input  logic [BANKS-1:0][WARP_SIZE-1:0]   wr_mask,
  input  warp_vec_t [BANKS-1:0]             wr_data
);
  for (genvar bk = 0; bk < BANKS; bk++) begin : g_bank
    logic [31:0] mem [BANK_ROWS][WARP_SIZE];
    always_ff @(posedge clk) begin
      for (int l = 0; l < WARP_SIZE; l++) begin
        if (wr_en[bk] && wr_mask[bk][l]) mem[wr_row[bk]][l] <= wr_data[bk][l];
        if (rd_en[bk]) rd_data[bk][l] <= mem[rd_row[bk]][l];
      end
    end
  end
endmodule
