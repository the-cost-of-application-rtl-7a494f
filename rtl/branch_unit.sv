// Branch unit, an extension of the ALU that resolves control flow. In the
// cycle after issue it evaluates the branch condition or jump target, writes
// the link address (pc+2 or pc+4) back for jal/jalr, and compares the actual
// next PC with the one the frontend chose (the predicted target if it
// redirected, the fall-through address otherwise). A difference is a
// mis-prediction: resolved_branch_o then carries the correct target and the
// frontend, decode and issue are flushed. Every resolution also updates the
// predictors (BHT for conditional branches, BTB for register jumps).
module branch_unit import ariane_pkg::*; (
  input  logic           valid_i,
  input  fu_data_t       fu_data_i,
  input  logic [63:0]    pc_i,
  input  logic           is_compressed_i,
  input  branchpredict_t bp_i,
  output logic [63:0]    link_o,
  output bp_resolve_t    resolved_branch_o
);
  logic [63:0] a, b, next_pc, target, predicted;
  logic        taken;
  assign a = fu_data_i.operand_a;
  assign b = fu_data_i.operand_b;
  assign next_pc = pc_i + (is_compressed_i ? 64'd2 : 64'd4);
  assign link_o  = next_pc;

  always_comb begin
    taken = 1'b0;
    unique case (fu_data_i.op)
      EQ:   taken = a == b;
      NE:   taken = a != b;
      LTS:  taken = $signed(a) < $signed(b);
      GES:  taken = $signed(a) >= $signed(b);
      LTU:  taken = a < b;
      GEU:  taken = a >= b;
      JAL, JALR: taken = 1'b1;
      default: taken = 1'b0;
    endcase
    if (fu_data_i.op == JALR) target = (a + fu_data_i.imm) & ~64'd1;
    else if (taken)           target = pc_i + fu_data_i.imm;
    else                      target = next_pc;
    predicted = bp_i.taken ? bp_i.predict_address : next_pc;

    resolved_branch_o.valid          = valid_i;
    resolved_branch_o.pc             = pc_i;
    resolved_branch_o.target_address = target;
    resolved_branch_o.is_taken       = taken;
    resolved_branch_o.is_mispredict  = valid_i && predicted != target;
    resolved_branch_o.cf = fu_data_i.op == JAL  ? Jump :
                           fu_data_i.op == JALR ? (bp_i.cf == Return ? Return : JumpR) : Branch;
  end
endmodule
