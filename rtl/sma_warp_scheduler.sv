// sma_warp_scheduler: picks the warp that issues in each cycle.
//
// Two policies share one "last issued" register:
//   SIMD mode (sys_mode low): greedy-then-oldest (GTO), the baseline GPU
//     policy: keep issuing the last warp while it is ready, otherwise take
//     the oldest ready warp. Warps are taken to be launched in index order,
//     so the oldest is the lowest index.
//   systolic mode (sys_mode high): round-robin, the first ready warp after
//     the last issued one, so that the two sets of double-buffering warps
//     (loaders in SIMD mode, LSMA issuers) cannot starve each other.
// The policies and the rule that round-robin applies only in systolic mode
// follow the paper; the age model and the one-issue-per-cycle, same-cycle
// grant are this design's.
//
// Interface: ready[w] says warp w can issue now; grant_valid/grant_id name
// the chosen warp in the same cycle; the choice is remembered at the clock
// edge. Combinational select, one register.
module sma_warp_scheduler
  import sma_pkg::*;
#(
  parameter int unsigned W = NUM_WARPS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sys_mode,
  input  logic [W-1:0]         ready,
  output logic                 grant_valid,
  output logic [$clog2(W)-1:0] grant_id
);
  localparam int unsigned IW = $clog2(W);
  logic [IW-1:0] last;
  logic          found;

  always_comb begin
    grant_valid = |ready;
    grant_id    = '0;
    found       = 1'b0;
    if (!sys_mode && ready[last]) begin
      grant_id = last;
      found    = 1'b1;
    end
    for (int i = 0; i < W; i++) begin
      // GTO: oldest = lowest index; RR: scan starting after "last"
      automatic logic [IW-1:0] c = sys_mode ? IW'(int'(last) + 1 + i) : IW'(i);
      if (!found && ready[c]) begin
        grant_id = c;
        found    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           last <= '0;
    else if (grant_valid) last <= grant_id;
  end

  a_grant_ready: assert property (@(posedge clk) disable iff (!rst_n) grant_valid |-> ready[grant_id]);
endmodule
