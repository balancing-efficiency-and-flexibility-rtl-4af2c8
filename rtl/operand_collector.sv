// operand_collector: operand collector of one SMA unit, in its two roles.
//
// SIMD mode: it accepts one FFMA warp instruction (rd = ra*rb + rc), reads
// the three source rows from the banked register file one after another
// (each read waits for the bank arbiter's grant and returns its 32 values
// the cycle after the grant), holds them as the operands of lanes 0..31 of
// the unit, fires the unit for one cycle and writes the 32 results back to
// row rd, again through the arbiter. done pulses with the warp id when the
// write has been granted.
// Systolic mode: the same b registers are the local buffer of the stationary
// weights, one per PE. The systolic controller writes them in two beats of
// 32 values; value l of beat h is element e = 32h + l of the 8x8 B sub-tile
// in row-major order, B[e/8][e%8], and goes to PE(n = e%8, k = e/8), whose
// lane is 8n + k (the transpose the weight-stationary mapping needs).
// Reusing the operand collector as the weight buffer is the paper's idea; the
// three-read sequence, the use of lanes 0..31 for a warp and the beat order
// are this design's choices.
//
// Timing (no bank conflict): accept in cycle 0, reads granted in cycles 1-3,
// unit fired in cycle 5, write-back requested from cycle 6.
module operand_collector
  import sma_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // SIMD dispatch
  input  logic                 disp_valid,
  input  rf_addr_t             disp_ra,
  input  rf_addr_t             disp_rb,
  input  rf_addr_t             disp_rc,
  input  rf_addr_t             disp_rd,
  input  warp_id_t             disp_warp,
  output logic                 idle,
  output logic                 done,
  output warp_id_t             done_warp,
  // register-file read
  output logic                 rd_req,
  output rf_addr_t             rd_addr,
  input  logic                 rd_gnt,
  input  warp_vec_t            rd_data,
  // register-file write
  output logic                 wr_req,
  output rf_addr_t             wr_addr,
  output warp_vec_t            wr_data,
  input  logic                 wr_gnt,
  // to / from the unit
  output logic                 pe_en,
  output logic [N*N-1:0]       simd_mask,
  output logic [N*N-1:0][31:0] a_lane,
  output logic [N*N-1:0][31:0] b_val,
  output logic [N*N-1:0][31:0] c_lane,
  input  logic [N*N-1:0][31:0] lane_y,
  // stationary weights from the systolic controller
  input  logic                 wt_we,
  input  logic                 wt_beat,
  input  warp_vec_t            wt_data
);
  localparam int unsigned LANES = N * N;

  typedef enum logic [1:0] { S_IDLE, S_COLLECT, S_EXEC, S_WB } state_e;
  state_e   state;
  rf_addr_t src [3];
  rf_addr_t dst;
  warp_id_t warp;
  logic [1:0] req_idx, pend_idx;
  logic       pend;

  assign idle      = (state == S_IDLE);
  assign rd_req    = (state == S_COLLECT) && (req_idx < 2'd3);
  assign rd_addr   = src[req_idx];
  assign wr_req    = (state == S_WB);
  assign wr_addr   = dst;
  assign pe_en     = (state == S_EXEC);
  assign done      = (state == S_WB) && wr_gnt;
  assign done_warp = warp;

  always_comb begin
    for (int l = 0; l < LANES; l++) simd_mask[l] = (l < WARP_SIZE);
    for (int l = 0; l < WARP_SIZE; l++) wr_data[l] = lane_y[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      req_idx  <= '0;
      pend     <= 1'b0;
      pend_idx <= '0;
      dst      <= '0;
      warp     <= '0;
      for (int j = 0; j < 3; j++) src[j] <= '0;
    end else begin
      pend     <= rd_req && rd_gnt;
      pend_idx <= req_idx;
      case (state)
        S_IDLE: if (disp_valid) begin
          src[0]  <= disp_ra;
          src[1]  <= disp_rb;
          src[2]  <= disp_rc;
          dst     <= disp_rd;
          warp    <= disp_warp;
          req_idx <= '0;
          state   <= S_COLLECT;
        end
        S_COLLECT: begin
          if (rd_req && rd_gnt) req_idx <= req_idx + 2'd1;
          if (pend && pend_idx == 2'd2) state <= S_EXEC;
        end
        S_EXEC: state <= S_WB;
        S_WB:   if (wr_gnt) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // operand / weight registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_lane <= '0;
      b_val  <= '0;
      c_lane <= '0;
    end else if (wt_we) begin
      for (int l = 0; l < WARP_SIZE; l++) begin
        automatic int e = WARP_SIZE * int'(wt_beat) + l;
        b_val[(e % N) * N + (e / N)] <= wt_data[l];
      end
    end else if (pend) begin
      for (int l = 0; l < WARP_SIZE; l++) begin
        case (pend_idx)
          2'd0:    a_lane[l] <= rd_data[l];
          2'd1:    b_val[l]  <= rd_data[l];
          default: c_lane[l] <= rd_data[l];
        endcase
      end
    end
  end

  // weights are only loaded while no SIMD instruction is being collected
  a_wt_idle: assert property (@(posedge clk) disable iff (!rst_n) wt_we |-> state == S_IDLE);
endmodule
