// sma_lsu: minimal shared-memory load/store path of the SM.
//
// STS copies one register-file row (32 lanes) into one shared-memory line;
// LDS copies a line into a register-file row. One instruction at a time:
//   STS: request the RF read until granted, write the returned row into the
//        line the cycle after the grant, signal done.
//   LDS: request the line read until the shared memory grants it (it is held
//        off while the systolic controller streams A), capture the line,
//        request the RF write until granted, signal done.
// This is the SIMD-mode data movement the double-buffered GEMM relies on;
// the baseline GPU's load/store unit is not described in the paper and this
// is the simplest thing that moves the data (no global memory, no address
// coalescing logic, no L1).
module sma_lsu
  import sma_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       disp_valid,
  input  logic       disp_is_lds,
  input  rf_addr_t   disp_reg,      // ra of STS, rd of LDS
  input  smem_addr_t disp_row,
  input  warp_id_t   disp_warp,
  output logic       idle,
  output logic       done,
  output warp_id_t   done_warp,
  output logic       stalled,       // waiting for a port held by another user
  // register file
  output logic       rd_req,
  output rf_addr_t   rd_addr,
  input  logic       rd_gnt,
  input  warp_vec_t  rd_data,
  output logic       wr_req,
  output rf_addr_t   wr_addr,
  output warp_vec_t  wr_data,
  input  logic       wr_gnt,
  // shared memory line port
  output logic       sm_rd_req,
  output smem_addr_t sm_rd_row,
  input  logic       sm_rd_gnt,
  input  warp_vec_t  sm_rd_data,
  output logic       sm_wr_en,
  output smem_addr_t sm_wr_row,
  output warp_vec_t  sm_wr_data
);
  typedef enum logic [2:0] { S_IDLE, S_RFRD, S_SMWR, S_SMRD, S_CAP, S_RFWR } state_e;
  state_e     state;
  rf_addr_t   reg_q;
  smem_addr_t row_q;
  warp_id_t   warp_q;
  warp_vec_t  buf_q;

  assign idle       = (state == S_IDLE);
  assign rd_req     = (state == S_RFRD);
  assign rd_addr    = reg_q;
  assign sm_wr_en   = (state == S_SMWR);
  assign sm_wr_row  = row_q;
  assign sm_wr_data = rd_data;
  assign sm_rd_req  = (state == S_SMRD);
  assign sm_rd_row  = row_q;
  assign wr_req     = (state == S_RFWR);
  assign wr_addr    = reg_q;
  assign wr_data    = buf_q;
  assign done       = (state == S_SMWR) || (state == S_RFWR && wr_gnt);
  assign done_warp  = warp_q;
  assign stalled    = (rd_req && !rd_gnt) || (sm_rd_req && !sm_rd_gnt) || (wr_req && !wr_gnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      reg_q  <= '0;
      row_q  <= '0;
      warp_q <= '0;
      buf_q  <= '0;
    end else begin
      case (state)
        S_IDLE: if (disp_valid) begin
          reg_q  <= disp_reg;
          row_q  <= disp_row;
          warp_q <= disp_warp;
          state  <= disp_is_lds ? S_SMRD : S_RFRD;
        end
        S_RFRD: if (rd_gnt) state <= S_SMWR;
        S_SMWR: state <= S_IDLE;
        S_SMRD: if (sm_rd_gnt) state <= S_CAP;
        S_CAP: begin
          buf_q <= sm_rd_data;
          state <= S_RFWR;
        end
        S_RFWR: if (wr_gnt) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
