// Pre-decoder of the frontend. It looks at one instruction (16-bit
// compressed or 32-bit) and tells the PC-select logic what kind of control
// flow it is and its PC-relative immediate: conditional branch, direct jump,
// register jump, call (link register x1/x5) or return. Purely combinational.
// Covered: BEQ..BGEU, JAL, JALR, C.BEQZ, C.BNEZ, C.J, C.JR, C.JALR (RV64C has
// no C.JAL). What counts as call and return follows the RISC-V calling
// convention hints.
module instr_scan (
  input  logic [31:0] instr_i,
  output logic        is_rvc_o,
  output logic        is_branch_o,
  output logic        is_jal_o,
  output logic        is_jalr_o,
  output logic        is_call_o,
  output logic        is_return_o,
  output logic [63:0] imm_o
);
  logic [4:0] rd, rs1;
  logic rd_link, rs1_link;
  assign is_rvc_o = instr_i[1:0] != 2'b11;
  assign rd  = instr_i[11:7];
  assign rs1 = instr_i[19:15];
  assign rd_link  = rd == 5'd1 || rd == 5'd5;
  assign rs1_link = rs1 == 5'd1 || rs1 == 5'd5;

  always_comb begin
    is_branch_o = 1'b0; is_jal_o = 1'b0; is_jalr_o = 1'b0;
    is_call_o = 1'b0; is_return_o = 1'b0; imm_o = '0;
    if (!is_rvc_o) begin
      unique case (instr_i[6:0])
        7'b1100011: begin
          is_branch_o = 1'b1;
          imm_o = {{52{instr_i[31]}}, instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
        end
        7'b1101111: begin
          is_jal_o  = 1'b1;
          is_call_o = rd_link;
          imm_o = {{44{instr_i[31]}}, instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};
        end
        7'b1100111: begin
          is_jalr_o   = 1'b1;
          is_call_o   = rd_link;
          is_return_o = rs1_link && rd == 5'd0;
        end
        default: ;
      endcase
    end else begin
      // quadrant 1: C.J (101), C.BEQZ (110), C.BNEZ (111)
      if (instr_i[1:0] == 2'b01 && instr_i[15:13] == 3'b101) begin
        is_jal_o = 1'b1;
        imm_o = {{53{instr_i[12]}}, instr_i[8], instr_i[10:9], instr_i[6], instr_i[7],
                 instr_i[2], instr_i[11], instr_i[5:3], 1'b0};
      end else if (instr_i[1:0] == 2'b01 && instr_i[15:14] == 2'b11) begin
        is_branch_o = 1'b1;
        imm_o = {{56{instr_i[12]}}, instr_i[6:5], instr_i[2], instr_i[11:10], instr_i[4:3], 1'b0};
      end else if (instr_i[1:0] == 2'b10 && instr_i[15:13] == 3'b100 &&
                   instr_i[6:2] == 5'd0 && instr_i[11:7] != 5'd0) begin
        // C.JR (bit 12 = 0) and C.JALR (bit 12 = 1)
        is_jalr_o   = 1'b1;
        is_call_o   = instr_i[12];
        is_return_o = !instr_i[12] && (instr_i[11:7] == 5'd1 || instr_i[11:7] == 5'd5);
      end
    end
  end
endmodule
