// shared_memory: the SM's banked shared memory.
//
// BANKS banks of 32-bit words, ROWS words per bank (32 banks x 768 rows =
// 96 KB by default). Word w of line r is in bank w, row r. Each bank has one
// read and one write port per cycle.
//   Line port (SIMD loads and stores): reads or writes a whole line, one word
//   per bank, i.e. a conflict-free warp access (lane l <-> bank l).
//   Systolic port: banks 0..SBANKS-1 can each read a row of their own,
//   which is how the systolic controller streams the columns of A with
//   uncoalesced accesses. While any systolic read is active, a line read
//   cannot use those banks and is held off (line_rd_gnt low); line writes
//   use the write ports and always proceed.
// The bank count, the 32-bit bank width, the 96 KB size and the 8 banks
// reserved for the systolic mode are the paper's; the port structure, the
// one-cycle read latency and the priority of systolic reads are this
// design's. The L1 data cache that shares this storage in the baseline GPU
// is not modelled.
//
// Timing: a read granted in cycle t returns its data in cycle t+1; a write
// in cycle t is visible to reads from cycle t+1.
module shared_memory
  import sma_pkg::*;
#(
  parameter int unsigned BANKS  = SMEM_BANKS,
  parameter int unsigned ROWS   = SMEM_ROWS,
  parameter int unsigned SBANKS = SMA_BANKS
) (
  input  logic                    clk,
  // line port
  input  logic                    line_rd_req,
  input  smem_addr_t              line_rd_row,
  output logic                    line_rd_gnt,
  output logic [BANKS-1:0][31:0]  line_rd_data,
  input  logic                    line_wr_en,
  input  smem_addr_t              line_wr_row,
  input  logic [BANKS-1:0][31:0]  line_wr_data,
  // systolic read port
  input  logic [SBANKS-1:0]       sa_rd_en,
  input  smem_addr_t [SBANKS-1:0] sa_rd_row,
  output logic [SBANKS-1:0][31:0] sa_rd_data
);
  logic [31:0] mem [BANKS][ROWS];

  assign line_rd_gnt = line_rd_req && (sa_rd_en == '0);

  for (genvar bk = 0; bk < BANKS; bk++) begin : g_bank
    logic       rd_en;
    smem_addr_t rd_row;
    logic [31:0] rd_q;
    if (bk < SBANKS) begin : g_sys
      assign rd_en  = sa_rd_en[bk] || line_rd_gnt;
      assign rd_row = sa_rd_en[bk] ? sa_rd_row[bk] : line_rd_row;
      assign sa_rd_data[bk] = rd_q;
    end else begin : g_simd
      assign rd_en  = line_rd_gnt;
      assign rd_row = line_rd_row;
    end
    always_ff @(posedge clk) begin
      if (line_wr_en) mem[bk][line_wr_row] <= line_wr_data[bk];
      if (rd_en)      rd_q <= mem[bk][rd_row];
    end
    assign line_rd_data[bk] = rd_q;
  end

  a_rows: assert property (@(posedge clk) line_wr_en |-> int'(line_wr_row) < ROWS);
endmodule
