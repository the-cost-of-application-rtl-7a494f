// Pipeline flush control. Collects the events that invalidate younger work
// and turns them into the flush signals of each stage:
//  - a branch mis-predict flushes the decode stage (the frontend redirects
//    itself; issue never runs ahead of an unresolved branch, so nothing
//    younger is in the scoreboard or the units);
//  - a trap, a return (xRET), debug entry or a commit-time refetch (after CSR
//    instructions and fences) flushes decode, issue/scoreboard and all
//    functional units, including speculative stores;
//  - fence.i: on the commit stage's request the data cache is asked to write
//    back and invalidate (one pulse); once it acknowledges, fence_i_done_o
//    lets the commit stage retire the fence.i, which flushes the I$.
module controller import ariane_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  bp_resolve_t resolved_branch_i,
  input  logic        ex_valid_i,
  input  logic        eret_i,
  input  logic        set_pc_commit_i,
  input  logic        fence_i_req_i,
  input  logic        dcache_flush_ack_i,
  output logic        flush_id_o,
  output logic        flush_ex_o,
  output logic        flush_dcache_o,
  output logic        fence_i_done_o
);
  typedef enum logic [1:0] { IDLE, FLUSHING, DONE } state_e;
  state_e state_q, state_d;

  assign flush_ex_o = ex_valid_i || eret_i || set_pc_commit_i;
  assign flush_id_o = flush_ex_o || (resolved_branch_i.valid && resolved_branch_i.is_mispredict);

  always_comb begin
    state_d = state_q; flush_dcache_o = 1'b0; fence_i_done_o = 1'b0;
    unique case (state_q)
      IDLE:     if (fence_i_req_i) begin flush_dcache_o = 1'b1; state_d = FLUSHING; end
      FLUSHING: if (dcache_flush_ack_i) state_d = DONE;
      DONE: begin fence_i_done_o = 1'b1; if (fence_i_req_i) state_d = IDLE; end
      default:  state_d = IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) state_q <= IDLE;
    else         state_q <= state_d;
  end
endmodule
