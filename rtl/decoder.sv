// Instruction decoder. Turns one 32-bit (possibly expanded) instruction into
// a scoreboard entry: functional unit, operation, source and destination
// registers, immediate (kept in the result field until write-back) and
// operand selects. Supports RV64I, M, Zicsr, fence/fence.i and the privileged
// instructions ecall, ebreak, mret, sret, dret, wfi and sfence.vma.
// Illegal encodings, and privileged instructions not allowed at the current
// privilege level (mret below M, sret below S or with mstatus.TSR in S,
// sfence.vma with TVM in S, wfi with TW below M, dret outside debug mode),
// raise an illegal-instruction exception with the encoding as tval; ecall and
// ebreak raise their exceptions here. A fetch exception passes through.
// Privilege-dependent CSR access checks are left to the CSR file at commit.
// Purely combinational.
module decoder import ariane_pkg::*; (
  input  logic [63:0]    pc_i,
  input  logic [31:0]    instr_i,        // expanded instruction
  input  logic [31:0]    instr_raw_i,    // as fetched, for tval
  input  logic           is_compressed_i,
  input  logic           is_illegal_c_i,
  input  branchpredict_t bp_i,
  input  exception_t     ex_i,
  input  priv_lvl_t      priv_lvl_i,
  input  logic           debug_mode_i,
  input  logic           tvm_i,
  input  logic           tw_i,
  input  logic           tsr_i,
  output sb_entry_t      instr_o,
  output logic           is_control_flow_o
);
  logic [6:0] opcode;
  logic [2:0] f3;
  logic [6:0] f7;
  logic       illegal;
  logic [63:0] imm_i_t, imm_s_t, imm_b_t, imm_u_t, imm_j_t;

  assign opcode = instr_i[6:0];
  assign f3     = instr_i[14:12];
  assign f7     = instr_i[31:25];
  assign imm_i_t = {{52{instr_i[31]}}, instr_i[31:20]};
  assign imm_s_t = {{52{instr_i[31]}}, instr_i[31:25], instr_i[11:7]};
  assign imm_b_t = {{51{instr_i[31]}}, instr_i[31], instr_i[7], instr_i[30:25], instr_i[11:8], 1'b0};
  assign imm_u_t = {{32{instr_i[31]}}, instr_i[31:12], 12'b0};
  assign imm_j_t = {{43{instr_i[31]}}, instr_i[31], instr_i[19:12], instr_i[20], instr_i[30:21], 1'b0};

  always_comb begin
    instr_o = '0;
    instr_o.pc = pc_i;
    instr_o.bp = bp_i;
    instr_o.is_compressed = is_compressed_i;
    instr_o.fu = FU_NONE;
    instr_o.op = ADD;
    instr_o.rs1 = {1'b0, instr_i[19:15]};
    instr_o.rs2 = {1'b0, instr_i[24:20]};
    instr_o.rd  = {1'b0, instr_i[11:7]};
    is_control_flow_o = 1'b0;
    illegal = is_illegal_c_i;
    unique case (opcode)
      7'b0110111: begin // lui
        instr_o.fu = FU_ALU; instr_o.op = ADD; instr_o.rs1 = '0; instr_o.rs2 = '0;
        instr_o.use_imm = 1'b1; instr_o.result = imm_u_t;
      end
      7'b0010111: begin // auipc
        instr_o.fu = FU_ALU; instr_o.op = ADD; instr_o.rs1 = '0; instr_o.rs2 = '0;
        instr_o.use_imm = 1'b1; instr_o.use_pc = 1'b1; instr_o.result = imm_u_t;
      end
      7'b1101111: begin // jal
        instr_o.fu = FU_CTRL; instr_o.op = JAL; instr_o.rs1 = '0; instr_o.rs2 = '0;
        instr_o.result = imm_j_t; is_control_flow_o = 1'b1;
      end
      7'b1100111: begin // jalr
        instr_o.fu = FU_CTRL; instr_o.op = JALR; instr_o.rs2 = '0;
        instr_o.result = imm_i_t; is_control_flow_o = 1'b1;
        illegal = illegal || f3 != 3'b000;
      end
      7'b1100011: begin // branches
        instr_o.fu = FU_CTRL; instr_o.rd = '0; instr_o.result = imm_b_t;
        is_control_flow_o = 1'b1;
        unique case (f3)
          3'b000: instr_o.op = EQ;
          3'b001: instr_o.op = NE;
          3'b100: instr_o.op = LTS;
          3'b101: instr_o.op = GES;
          3'b110: instr_o.op = LTU;
          3'b111: instr_o.op = GEU;
          default: illegal = 1'b1;
        endcase
      end
      7'b0000011: begin // loads
        instr_o.fu = FU_LOAD; instr_o.rs2 = '0; instr_o.result = imm_i_t;
        unique case (f3)
          3'b000: instr_o.op = LB;
          3'b001: instr_o.op = LH;
          3'b010: instr_o.op = LW;
          3'b011: instr_o.op = LD;
          3'b100: instr_o.op = LBU;
          3'b101: instr_o.op = LHU;
          3'b110: instr_o.op = LWU;
          default: illegal = 1'b1;
        endcase
      end
      7'b0100011: begin // stores
        instr_o.fu = FU_STORE; instr_o.rd = '0; instr_o.result = imm_s_t;
        unique case (f3)
          3'b000: instr_o.op = SB;
          3'b001: instr_o.op = SH;
          3'b010: instr_o.op = SW;
          3'b011: instr_o.op = SD;
          default: illegal = 1'b1;
        endcase
      end
      7'b0010011, 7'b0011011: begin // op-imm, op-imm-32
        logic w;
        w = opcode[3];
        instr_o.fu = FU_ALU; instr_o.rs2 = '0; instr_o.use_imm = 1'b1; instr_o.result = imm_i_t;
        unique case (f3)
          3'b000: instr_o.op = w ? ADDW : ADD;
          3'b010: begin instr_o.op = SLT;  illegal = illegal || w; end
          3'b011: begin instr_o.op = SLTU; illegal = illegal || w; end
          3'b100: begin instr_o.op = XORL; illegal = illegal || w; end
          3'b110: begin instr_o.op = ORL;  illegal = illegal || w; end
          3'b111: begin instr_o.op = ANDL; illegal = illegal || w; end
          3'b001: begin
            instr_o.op = w ? SLLW : SLL;
            illegal = illegal || instr_i[31:26] != 6'b0 || (w && instr_i[25]);
          end
          default: begin
            instr_o.op = instr_i[30] ? (w ? SRAW : SRA) : (w ? SRLW : SRL);
            illegal = illegal || {instr_i[31], instr_i[29:26]} != 5'b0 || (w && instr_i[25]);
          end
        endcase
      end
      7'b0110011, 7'b0111011: begin // op, op-32
        logic w;
        w = opcode[3];
        if (f7 == 7'b0000001) begin
          instr_o.fu = FU_MULT;
          unique case (f3)
            3'b000: instr_o.op = w ? MULW : MUL;
            3'b001: begin instr_o.op = MULH;   illegal = illegal || w; end
            3'b010: begin instr_o.op = MULHSU; illegal = illegal || w; end
            3'b011: begin instr_o.op = MULHU;  illegal = illegal || w; end
            3'b100: instr_o.op = w ? DIVW : DIV;
            3'b101: instr_o.op = w ? DIVUW : DIVU;
            3'b110: instr_o.op = w ? REMW : REM;
            default: instr_o.op = w ? REMUW : REMU;
          endcase
        end else begin
          instr_o.fu = FU_ALU;
          unique case ({f7, f3})
            {7'h00, 3'b000}: instr_o.op = w ? ADDW : ADD;
            {7'h20, 3'b000}: instr_o.op = w ? SUBW : SUB;
            {7'h00, 3'b001}: instr_o.op = w ? SLLW : SLL;
            {7'h00, 3'b101}: instr_o.op = w ? SRLW : SRL;
            {7'h20, 3'b101}: instr_o.op = w ? SRAW : SRA;
            {7'h00, 3'b010}: begin instr_o.op = SLT;  illegal = illegal || w; end
            {7'h00, 3'b011}: begin instr_o.op = SLTU; illegal = illegal || w; end
            {7'h00, 3'b100}: begin instr_o.op = XORL; illegal = illegal || w; end
            {7'h00, 3'b110}: begin instr_o.op = ORL;  illegal = illegal || w; end
            {7'h00, 3'b111}: begin instr_o.op = ANDL; illegal = illegal || w; end
            default: illegal = 1'b1;
          endcase
        end
      end
      7'b0001111: begin // fence, fence.i
        instr_o.fu = FU_CSR; instr_o.rs1 = '0; instr_o.rs2 = '0; instr_o.rd = '0;
        unique case (f3)
          3'b000: instr_o.op = FENCE;
          3'b001: instr_o.op = FENCE_I;
          default: illegal = 1'b1;
        endcase
      end
      7'b1110011: begin // system
        instr_o.fu = FU_CSR;
        if (f3 == 3'b000) begin
          instr_o.rs1 = '0; instr_o.rs2 = '0; instr_o.rd = '0;
          if (f7 == 7'b0001001) begin
            instr_o.op = SFENCE_VMA;
            instr_o.rs1 = {1'b0, instr_i[19:15]}; instr_o.rs2 = {1'b0, instr_i[24:20]};
            illegal = illegal || priv_lvl_i == PRIV_U || (priv_lvl_i == PRIV_S && tvm_i);
          end else begin
            unique case (instr_i[31:20])
              12'h000: begin
                instr_o.op = ECALL;
                instr_o.ex.valid = 1'b1;
                instr_o.ex.cause = priv_lvl_i == PRIV_M ? ENV_CALL_MMODE :
                                   priv_lvl_i == PRIV_S ? ENV_CALL_SMODE : ENV_CALL_UMODE;
              end
              12'h001: begin
                instr_o.op = EBREAK;
                instr_o.ex.valid = 1'b1;
                instr_o.ex.cause = BREAKPOINT;
                instr_o.ex.tval  = pc_i;
              end
              12'h302: begin instr_o.op = MRET; illegal = illegal || priv_lvl_i != PRIV_M; end
              12'h102: begin
                instr_o.op = SRET;
                illegal = illegal || priv_lvl_i == PRIV_U || (priv_lvl_i == PRIV_S && tsr_i);
              end
              12'h7b2: begin instr_o.op = DRET; illegal = illegal || !debug_mode_i; end
              12'h105: begin instr_o.op = WFI; illegal = illegal || (priv_lvl_i != PRIV_M && tw_i); end
              default: illegal = 1'b1;
            endcase
          end
        end else begin
          instr_o.rs2 = '0;
          instr_o.result = {52'b0, instr_i[31:20]};  // CSR address
          instr_o.use_zimm = f3[2];
          if (f3[2]) instr_o.rs1 = '0;
          unique case (f3[1:0])
            2'b01: instr_o.op = CSR_WRITE;
            2'b10: instr_o.op = instr_i[19:15] == 5'd0 ? CSR_READ : CSR_SET;
            2'b11: instr_o.op = instr_i[19:15] == 5'd0 ? CSR_READ : CSR_CLEAR;
            default: illegal = 1'b1;
          endcase
          // the zimm field rides in rs1's position of the encoding
          if (f3[2]) instr_o.result[16:12] = instr_i[19:15];
        end
      end
      default: illegal = 1'b1;
    endcase
    if (illegal) begin
      instr_o.ex.valid = 1'b1;
      instr_o.ex.cause = ILLEGAL_INSTR;
      instr_o.ex.tval  = is_compressed_i ? {48'b0, instr_raw_i[15:0]} : {32'b0, instr_raw_i};
    end
    if (ex_i.valid) instr_o.ex = ex_i;
  end
endmodule
