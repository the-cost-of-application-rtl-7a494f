// Scoreboard with re-order buffer: a circular buffer of NR_ENTRIES in-flight
// instructions between issue and commit. An instruction is written at the
// issue pointer when it is issued and its slot index is its transaction ID.
// Functional units write their (speculative) results and exceptions back by
// transaction ID through NR_WB_PORTS ports, in any order. The commit stage
// sees the two oldest entries and retires them in program order with
// commit_ack_i (entry 1 only together with entry 0).
// For the issue stage it answers, combinationally: does an in-flight
// instruction write source register rs (the youngest such writer), is its
// result already there (in the buffer or on a write-back port this cycle)
// and what is it; and is a destination name still in use (WAW check on the
// renamed, 6-bit register names). A flush empties the buffer.
module scoreboard import ariane_pkg::*; #(
  parameter int unsigned NR_ENTRIES  = 8,
  parameter int unsigned NR_WB_PORTS = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     flush_i,
  output logic                     full_o,
  output logic                     empty_o,
  // issue
  input  sb_entry_t                issue_instr_i,
  input  logic                     issue_i,
  output logic [TRANS_ID_BITS-1:0] issue_trans_id_o,
  // operand lookup
  input  logic [1:0][5:0]          rs_i,
  output logic [1:0]               rs_found_o,
  output logic [1:0]               rs_valid_o,
  output logic [1:0][63:0]         rs_data_o,
  input  logic [5:0]               rd_i,
  output logic                     rd_clobber_o,
  // write-back
  input  wb_t [NR_WB_PORTS-1:0]    wb_i,
  // commit
  output sb_entry_t [1:0]          commit_instr_o,
  output logic [1:0]               commit_valid_o,
  input  logic [1:0]               commit_ack_i
);
  localparam int unsigned IW = $clog2(NR_ENTRIES);
  sb_entry_t       mem_q [NR_ENTRIES];
  logic [IW-1:0]   issue_ptr_q, commit_ptr_q;
  logic [IW:0]     cnt_q;
  logic [1:0]      n_commit;

  assign full_o  = cnt_q == (IW+1)'(NR_ENTRIES);
  assign empty_o = cnt_q == '0;
  assign issue_trans_id_o = issue_ptr_q;
  assign n_commit = commit_ack_i[0] ? (commit_ack_i[1] ? 2'd2 : 2'd1) : 2'd0;

  for (genvar c = 0; c < 2; c++) begin : g_commit
    assign commit_instr_o[c] = mem_q[IW'(commit_ptr_q + IW'(c))];
    assign commit_valid_o[c] = cnt_q > (IW+1)'(c);
  end

  // youngest writer of each source, forwarding
  always_comb begin
    for (int s = 0; s < 2; s++) begin
      logic [IW-1:0] idx, hit_idx;
      rs_found_o[s] = 1'b0; rs_valid_o[s] = 1'b0; rs_data_o[s] = '0; hit_idx = '0;
      for (int k = 0; k < NR_ENTRIES; k++) begin
        idx = IW'(commit_ptr_q + IW'(k));
        if ((IW+1)'(k) < cnt_q && mem_q[idx].rd == rs_i[s]) begin
          rs_found_o[s] = 1'b1; hit_idx = idx;
        end
      end
      if (rs_found_o[s]) begin
        rs_valid_o[s] = mem_q[hit_idx].valid;
        rs_data_o[s]  = mem_q[hit_idx].result;
        for (int p = 0; p < NR_WB_PORTS; p++)
          if (!mem_q[hit_idx].valid && wb_i[p].valid && wb_i[p].trans_id == hit_idx) begin
            rs_valid_o[s] = 1'b1; rs_data_o[s] = wb_i[p].data;
          end
      end
    end
    rd_clobber_o = 1'b0;
    for (int k = 0; k < NR_ENTRIES; k++)
      if ((IW+1)'(k) < cnt_q && mem_q[IW'(commit_ptr_q + IW'(k))].rd == rd_i) rd_clobber_o = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      issue_ptr_q <= '0; commit_ptr_q <= '0; cnt_q <= '0;
      for (int i = 0; i < NR_ENTRIES; i++) mem_q[i] <= '0;
    end else if (flush_i) begin
      issue_ptr_q <= '0; commit_ptr_q <= '0; cnt_q <= '0;
    end else begin
      for (int p = 0; p < NR_WB_PORTS; p++) begin
        if (wb_i[p].valid) begin
          mem_q[wb_i[p].trans_id].valid  <= 1'b1;
          mem_q[wb_i[p].trans_id].result <= wb_i[p].data;
          if (wb_i[p].ex.valid) mem_q[wb_i[p].trans_id].ex <= wb_i[p].ex;
        end
      end
      if (issue_i && !full_o) begin
        mem_q[issue_ptr_q] <= issue_instr_i;
        issue_ptr_q <= IW'(issue_ptr_q + 1'b1);
      end
      commit_ptr_q <= IW'(commit_ptr_q + IW'(n_commit));
      cnt_q <= cnt_q + (IW+1)'(issue_i && !full_o) - (IW+1)'(n_commit);
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                   commit_ack_i[0] |-> commit_valid_o[0]);
  assert property (@(posedge clk_i) disable iff (!rst_ni || flush_i)
                   commit_ack_i[1] |-> commit_ack_i[0] && commit_valid_o[1]);
endmodule
