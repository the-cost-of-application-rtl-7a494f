// Issue stage: in-order, single issue. It owns the scoreboard, the integer
// register file and the renaming table.
//
// Renaming: the architectural register address gets one extra bit. A table
// holds the current bit of each of the 32 registers; every issued
// instruction that writes rd toggles rd's bit and is tracked under the new
// 6-bit name, and sources are looked up under their current name. Two
// in-flight writers of the same register therefore have different names, and
// a reader waits only for the youngest. A write-after-write stall is only
// needed when the new name is still in flight (a third writer).
//
// An instruction issues when: the scoreboard has room, its functional unit is
// ready (and no request for that unit is waiting in the dispatch register),
// every source is either not written by an in-flight instruction or its
// result is already available (from the scoreboard or a write-back port in
// this very cycle), its destination name is free, and no branch is
// unresolved (issue pauses behind a control-flow instruction until the
// branch unit has resolved it, so nothing younger than a branch is ever
// executed). Operands are read from the register file or forwarded and
// registered with the request (dispatch register); the unit works on it in
// the next cycle. Instructions that already carry an exception enter the
// scoreboard as finished without going to a unit.
module issue_stage import ariane_pkg::*; #(
  parameter int unsigned NR_WB_PORTS = 4
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  flush_i,
  output logic                  sb_full_o,
  output logic                  sb_empty_o,
  // from decode
  input  sb_entry_t             decoded_instr_i,
  input  logic                  decoded_valid_i,
  input  logic                  is_ctrl_flow_i,
  output logic                  decoded_ack_o,
  // functional-unit readiness
  input  logic                  lsu_ready_i,
  input  logic                  mult_ready_i,
  input  logic                  csr_ready_i,
  // dispatch
  output fu_data_t              fu_data_o,
  output logic [63:0]           pc_o,
  output logic                  is_compressed_o,
  output branchpredict_t        bp_o,
  output logic                  alu_valid_o,
  output logic                  branch_valid_o,
  output logic                  lsu_valid_o,
  output logic                  mult_valid_o,
  output logic                  csr_valid_o,
  input  bp_resolve_t           resolved_branch_i,
  // write-back
  input  wb_t [NR_WB_PORTS-1:0] wb_i,
  // commit
  output sb_entry_t [1:0]       commit_instr_o,
  output logic [1:0]            commit_valid_o,
  input  logic [1:0]            commit_ack_i,
  input  logic [1:0][4:0]       waddr_i,
  input  logic [1:0][63:0]      wdata_i,
  input  logic [1:0]            we_i
);
  logic [31:0] rename_q;
  logic        unresolved_q;
  sb_entry_t   instr;
  logic [1:0][5:0]  rs;
  logic [1:0]       rs_found, rs_valid;
  logic [1:0][63:0] rs_data, rf_data, opnd;
  logic [5:0]  rd_new;
  logic        rd_clobber, fu_ready, srcs_ok, dispatch, issue;
  logic [TRANS_ID_BITS-1:0] trans_id;

  assign rs[0]  = {rename_q[decoded_instr_i.rs1[4:0]], decoded_instr_i.rs1[4:0]};
  assign rs[1]  = {rename_q[decoded_instr_i.rs2[4:0]], decoded_instr_i.rs2[4:0]};
  assign rd_new = decoded_instr_i.rd[4:0] == 5'd0 ? 6'd0 :
                  {!rename_q[decoded_instr_i.rd[4:0]], decoded_instr_i.rd[4:0]};

  always_comb begin
    instr = decoded_instr_i;
    instr.rs1 = rs[0];
    instr.rs2 = rs[1];
    instr.rd  = rd_new;
    instr.trans_id = trans_id;
    instr.valid = decoded_instr_i.ex.valid || decoded_instr_i.fu == FU_NONE;
  end

  scoreboard #(.NR_ENTRIES(NR_SB_ENTRIES), .NR_WB_PORTS(NR_WB_PORTS)) i_sb (
    .clk_i, .rst_ni, .flush_i, .full_o(sb_full_o), .empty_o(sb_empty_o),
    .issue_instr_i(instr), .issue_i(issue), .issue_trans_id_o(trans_id),
    .rs_i(rs), .rs_found_o(rs_found), .rs_valid_o(rs_valid), .rs_data_o(rs_data),
    .rd_i(rd_new), .rd_clobber_o(rd_clobber), .wb_i,
    .commit_instr_o, .commit_valid_o, .commit_ack_i);

  regfile #(.NR_REGS(32), .XLEN(64)) i_regfile (
    .clk_i, .rst_ni, .raddr_i({rs[1][4:0], rs[0][4:0]}), .rdata_o(rf_data),
    .waddr_i, .wdata_i, .we_i);

  always_comb begin
    for (int s = 0; s < 2; s++)
      opnd[s] = (rs[s][4:0] == 5'd0) ? 64'd0 : (rs_found[s] ? rs_data[s] : rf_data[s]);
    srcs_ok = 1'b1;
    for (int s = 0; s < 2; s++)
      if (rs[s][4:0] != 5'd0 && rs_found[s] && !rs_valid[s]) srcs_ok = 1'b0;
    unique case (decoded_instr_i.fu)
      FU_LOAD, FU_STORE: fu_ready = lsu_ready_i && !lsu_valid_o;
      FU_MULT:           fu_ready = mult_ready_i && !mult_valid_o;
      FU_CSR:            fu_ready = csr_ready_i && !csr_valid_o;
      default:           fu_ready = 1'b1;
    endcase
  end

  assign dispatch = !instr.valid;
  assign issue = decoded_valid_i && !flush_i && !sb_full_o &&
                 (!unresolved_q || (resolved_branch_i.valid && !resolved_branch_i.is_mispredict)) &&
                 (!dispatch || (fu_ready && srcs_ok && (rd_new == 6'd0 || !rd_clobber)));
  assign decoded_ack_o = issue;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rename_q <= '0; unresolved_q <= 1'b0;
      fu_data_o <= '0; pc_o <= '0; is_compressed_o <= 1'b0; bp_o <= '0;
      alu_valid_o <= 1'b0; branch_valid_o <= 1'b0; lsu_valid_o <= 1'b0;
      mult_valid_o <= 1'b0; csr_valid_o <= 1'b0;
    end else if (flush_i) begin
      rename_q <= '0; unresolved_q <= 1'b0;
      alu_valid_o <= 1'b0; branch_valid_o <= 1'b0; lsu_valid_o <= 1'b0;
      mult_valid_o <= 1'b0; csr_valid_o <= 1'b0;
    end else begin
      if (resolved_branch_i.valid) unresolved_q <= 1'b0;
      alu_valid_o    <= issue && dispatch && decoded_instr_i.fu == FU_ALU;
      branch_valid_o <= issue && dispatch && decoded_instr_i.fu == FU_CTRL;
      lsu_valid_o    <= issue && dispatch && (decoded_instr_i.fu == FU_LOAD || decoded_instr_i.fu == FU_STORE);
      mult_valid_o   <= issue && dispatch && decoded_instr_i.fu == FU_MULT;
      csr_valid_o    <= issue && dispatch && decoded_instr_i.fu == FU_CSR;
      if (issue) begin
        if (rd_new != 6'd0) rename_q[rd_new[4:0]] <= rd_new[5];
        if (dispatch && is_ctrl_flow_i) unresolved_q <= 1'b1;
        fu_data_o.fu        <= decoded_instr_i.fu;
        fu_data_o.op        <= decoded_instr_i.op;
        fu_data_o.operand_a <= decoded_instr_i.use_pc   ? decoded_instr_i.pc :
                               decoded_instr_i.use_zimm ? {59'b0, decoded_instr_i.result[16:12]} : opnd[0];
        fu_data_o.operand_b <= decoded_instr_i.use_imm ? decoded_instr_i.result : opnd[1];
        fu_data_o.imm       <= decoded_instr_i.result;
        fu_data_o.trans_id  <= trans_id;
        pc_o            <= decoded_instr_i.pc;
        is_compressed_o <= decoded_instr_i.is_compressed;
        bp_o            <= decoded_instr_i.bp;
      end
    end
  end
endmodule
