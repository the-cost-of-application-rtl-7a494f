// Testbench of the instruction decoder. Every instruction is assembled here
// from random register numbers and immediates with the RISC-V base formats
// (R, I, S, B, U, J), and the expected scoreboard entry is written down from
// the instruction set tables in this file, not from the decoder:
//  - each RV64I and M instruction: functional unit, operation, rd, rs1, rs2
//    (zero where the format has none), the immediate as sign-extended by its
//    format, and the immediate-operand flag for lui/auipc/op-imm;
//  - CSR instructions: write/set/clear, reads when rs1/zimm is x0, the CSR
//    address and the 5-bit zimm in the immediate field;
//  - illegal encodings (atomics and floating point, which this core does not
//    implement, reserved funct3/funct7 values, W forms that do not exist):
//    illegal-instruction exception with the encoding as tval;
//  - privileged instructions in U, S and M mode with random TVM, TW, TSR and
//    debug-mode settings; ecall causes by privilege level; ebreak;
//  - a fetch exception passes through unchanged.
// The decoder is combinational; outputs are sampled 1 time unit after the
// inputs change.
module decoder_tb;
  import ariane_pkg::*;

  logic [63:0]    pc;
  logic [31:0]    instr;
  logic           is_c, ill_c, dbg, tvm, tw, tsr;
  branchpredict_t bp;
  exception_t     fex;
  priv_lvl_t      priv;
  sb_entry_t      out;
  logic           is_cf;

  decoder dut (.pc_i(pc), .instr_i(instr), .instr_raw_i(instr), .is_compressed_i(is_c),
               .is_illegal_c_i(ill_c), .bp_i(bp), .ex_i(fex), .priv_lvl_i(priv),
               .debug_mode_i(dbg), .tvm_i(tvm), .tw_i(tw), .tsr_i(tsr),
               .instr_o(out), .is_control_flow_o(is_cf));

  int unsigned checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL @%0t: %s instr=%h", $time, what, instr);
    end
  endtask

  typedef enum { FR, FI, FSH, FS, FB, FU, FJ } fmt_t;
  typedef struct {
    logic [6:0] opc;
    logic [2:0] f3;
    logic [6:0] f7;     // for FR; for FSH the upper 6 bits (bit 0 ignored)
    fmt_t       fmt;
    fu_t        fu;
    fu_op_t     op;
  } ins_t;

  localparam int NI = 54;
  ins_t tab [NI] = '{
    '{7'h37, 3'd0, 7'h00, FU,  FU_ALU,   ADD},    // lui
    '{7'h17, 3'd0, 7'h00, FU,  FU_ALU,   ADD},    // auipc
    '{7'h6f, 3'd0, 7'h00, FJ,  FU_CTRL,  JAL},
    '{7'h67, 3'd0, 7'h00, FI,  FU_CTRL,  JALR},
    '{7'h63, 3'd0, 7'h00, FB,  FU_CTRL,  EQ},
    '{7'h63, 3'd1, 7'h00, FB,  FU_CTRL,  NE},
    '{7'h63, 3'd4, 7'h00, FB,  FU_CTRL,  LTS},
    '{7'h63, 3'd5, 7'h00, FB,  FU_CTRL,  GES},
    '{7'h63, 3'd6, 7'h00, FB,  FU_CTRL,  LTU},
    '{7'h63, 3'd7, 7'h00, FB,  FU_CTRL,  GEU},
    '{7'h03, 3'd0, 7'h00, FI,  FU_LOAD,  LB},
    '{7'h03, 3'd1, 7'h00, FI,  FU_LOAD,  LH},
    '{7'h03, 3'd2, 7'h00, FI,  FU_LOAD,  LW},
    '{7'h03, 3'd3, 7'h00, FI,  FU_LOAD,  LD},
    '{7'h03, 3'd4, 7'h00, FI,  FU_LOAD,  LBU},
    '{7'h03, 3'd5, 7'h00, FI,  FU_LOAD,  LHU},
    '{7'h03, 3'd6, 7'h00, FI,  FU_LOAD,  LWU},
    '{7'h23, 3'd0, 7'h00, FS,  FU_STORE, SB},
    '{7'h23, 3'd1, 7'h00, FS,  FU_STORE, SH},
    '{7'h23, 3'd2, 7'h00, FS,  FU_STORE, SW},
    '{7'h23, 3'd3, 7'h00, FS,  FU_STORE, SD},
    '{7'h13, 3'd0, 7'h00, FI,  FU_ALU,   ADD},
    '{7'h13, 3'd2, 7'h00, FI,  FU_ALU,   SLT},
    '{7'h13, 3'd3, 7'h00, FI,  FU_ALU,   SLTU},
    '{7'h13, 3'd4, 7'h00, FI,  FU_ALU,   XORL},
    '{7'h13, 3'd6, 7'h00, FI,  FU_ALU,   ORL},
    '{7'h13, 3'd7, 7'h00, FI,  FU_ALU,   ANDL},
    '{7'h13, 3'd1, 7'h00, FSH, FU_ALU,   SLL},
    '{7'h13, 3'd5, 7'h00, FSH, FU_ALU,   SRL},
    '{7'h13, 3'd5, 7'h20, FSH, FU_ALU,   SRA},
    '{7'h1b, 3'd0, 7'h00, FI,  FU_ALU,   ADDW},
    '{7'h33, 3'd0, 7'h00, FR,  FU_ALU,   ADD},
    '{7'h33, 3'd0, 7'h20, FR,  FU_ALU,   SUB},
    '{7'h33, 3'd1, 7'h00, FR,  FU_ALU,   SLL},
    '{7'h33, 3'd2, 7'h00, FR,  FU_ALU,   SLT},
    '{7'h33, 3'd3, 7'h00, FR,  FU_ALU,   SLTU},
    '{7'h33, 3'd4, 7'h00, FR,  FU_ALU,   XORL},
    '{7'h33, 3'd5, 7'h00, FR,  FU_ALU,   SRL},
    '{7'h33, 3'd5, 7'h20, FR,  FU_ALU,   SRA},
    '{7'h33, 3'd6, 7'h00, FR,  FU_ALU,   ORL},
    '{7'h33, 3'd7, 7'h00, FR,  FU_ALU,   ANDL},
    '{7'h3b, 3'd0, 7'h00, FR,  FU_ALU,   ADDW},
    '{7'h3b, 3'd0, 7'h20, FR,  FU_ALU,   SUBW},
    '{7'h3b, 3'd1, 7'h00, FR,  FU_ALU,   SLLW},
    '{7'h3b, 3'd5, 7'h00, FR,  FU_ALU,   SRLW},
    '{7'h3b, 3'd5, 7'h20, FR,  FU_ALU,   SRAW},
    '{7'h33, 3'd0, 7'h01, FR,  FU_MULT,  MUL},
    '{7'h33, 3'd1, 7'h01, FR,  FU_MULT,  MULH},
    '{7'h33, 3'd2, 7'h01, FR,  FU_MULT,  MULHSU},
    '{7'h33, 3'd3, 7'h01, FR,  FU_MULT,  MULHU},
    '{7'h33, 3'd4, 7'h01, FR,  FU_MULT,  DIV},
    '{7'h33, 3'd5, 7'h01, FR,  FU_MULT,  DIVU},
    '{7'h33, 3'd6, 7'h01, FR,  FU_MULT,  REM},
    '{7'h33, 3'd7, 7'h01, FR,  FU_MULT,  REMU}
  };
  // the W forms of the M extension and the 32-bit shifts by immediate
  localparam int NW = 7;
  ins_t tabw [NW] = '{
    '{7'h3b, 3'd0, 7'h01, FR,  FU_MULT,  MULW},
    '{7'h3b, 3'd4, 7'h01, FR,  FU_MULT,  DIVW},
    '{7'h3b, 3'd5, 7'h01, FR,  FU_MULT,  DIVUW},
    '{7'h3b, 3'd6, 7'h01, FR,  FU_MULT,  REMW},
    '{7'h3b, 3'd7, 7'h01, FR,  FU_MULT,  REMUW},
    '{7'h1b, 3'd1, 7'h00, FSH, FU_ALU,   SLLW},
    '{7'h1b, 3'd5, 7'h20, FSH, FU_ALU,   SRAW}
  };

  task automatic legal_ins(input ins_t t, input bit w32);
    logic [4:0] rd, rs1, rs2;
    logic [31:0] r;
    logic [63:0] imm;
    logic [5:0]  sh;
    bit has_rd, has_rs1, has_rs2;
    rd = 5'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom);
    r = $urandom;
    has_rd = 1; has_rs1 = 1; has_rs2 = 0; imm = '0;
    unique case (t.fmt)
      FR: begin instr = {t.f7, rs2, rs1, t.f3, rd, t.opc}; has_rs2 = 1; end
      FI: begin instr = {r[11:0], rs1, t.f3, rd, t.opc}; imm = {{52{r[11]}}, r[11:0]}; end
      FSH: begin
        sh = w32 ? {1'b0, r[4:0]} : r[5:0];
        instr = {t.f7[6:1], sh, rs1, t.f3, rd, t.opc};
        imm = {{52{t.f7[6]}}, t.f7[6:1], sh};
      end
      FS: begin
        instr = {r[11:5], rs2, rs1, t.f3, r[4:0], t.opc}; imm = {{52{r[11]}}, r[11:0]};
        has_rd = 0; has_rs2 = 1;
      end
      FB: begin
        instr = {r[12], r[10:5], rs2, rs1, t.f3, r[4:1], r[11], t.opc};
        imm = {{51{r[12]}}, r[12:1], 1'b0}; has_rd = 0; has_rs2 = 1;
      end
      FU: begin instr = {r[31:12], rd, t.opc}; imm = {{32{r[31]}}, r[31:12], 12'b0}; has_rs1 = 0; end
      default: begin // FJ
        instr = {r[20], r[10:1], r[11], r[19:12], rd, t.opc};
        imm = {{43{r[20]}}, r[20:1], 1'b0}; has_rs1 = 0;
      end
    endcase
    #1;
    check(!out.ex.valid, $sformatf("%s decodes without exception", t.op.name()));
    check(out.fu == t.fu && out.op == t.op, $sformatf("%s unit and operation", t.op.name()));
    check(out.rd == (has_rd ? {1'b0, rd} : 6'd0), $sformatf("%s rd", t.op.name()));
    check(out.rs1 == (has_rs1 ? {1'b0, rs1} : 6'd0), $sformatf("%s rs1", t.op.name()));
    check(out.rs2 == (has_rs2 ? {1'b0, rs2} : 6'd0), $sformatf("%s rs2", t.op.name()));
    check(out.result == imm, $sformatf("%s immediate", t.op.name()));
    check(out.use_imm == (t.fu == FU_ALU && t.fmt != FR), $sformatf("%s immediate operand", t.op.name()));
    check(is_cf == (t.fu == FU_CTRL), "control-flow flag");
    check(out.pc == pc, "pc carried");
  endtask

  task automatic expect_illegal(input string what);
    #1;
    check(out.ex.valid && out.ex.cause == ILLEGAL_INSTR && out.ex.tval == {32'b0, instr}, what);
  endtask

  task automatic expect_legal_priv(input bit legal, input fu_op_t op, input string what);
    #1;
    if (legal) check(!out.ex.valid && out.fu == FU_CSR && out.op == op, what);
    else check(out.ex.valid && out.ex.cause == ILLEGAL_INSTR, what);
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [4:0]  rd, rs1;
    logic [11:0] csra;
    logic [2:0]  f3;
    logic [6:0]  badop [5] = '{7'h2f, 7'h07, 7'h27, 7'h53, 7'h43};
    priv_lvl_t   pl [3] = '{PRIV_U, PRIV_S, PRIV_M};
    pc = 64'h8000_0000; is_c = 1'b0; ill_c = 1'b0; bp = '0; fex = '0;
    priv = PRIV_M; dbg = 1'b0; tvm = 1'b0; tw = 1'b0; tsr = 1'b0;
    for (int n = 0; n < 200; n++) begin
      pc = {$urandom, $urandom};
      priv = pl[$urandom_range(2)];
      foreach (tab[i]) legal_ins(tab[i], 1'b0);
      foreach (tabw[i]) legal_ins(tabw[i], 1'b1);
      // CSR instructions
      rd = 5'($urandom); rs1 = 5'($urandom_range(3)); csra = 12'($urandom);
      f3 = 3'($urandom_range(3, 1)) | (3'($urandom_range(1)) << 2);
      instr = {csra, rs1, f3, rd, 7'h73};
      #1;
      check(!out.ex.valid && out.fu == FU_CSR, "CSR instruction decodes");
      check(out.op == (f3[1:0] == 2'b01 ? CSR_WRITE : rs1 == 5'd0 ? CSR_READ :
                       f3[1:0] == 2'b10 ? CSR_SET : CSR_CLEAR), "CSR operation");
      check(out.result[11:0] == csra && out.rd == {1'b0, rd}, "CSR address and rd");
      check(out.use_zimm == f3[2] && (f3[2] ? (out.rs1 == 6'd0 && out.result[16:12] == rs1)
                                            : out.rs1 == {1'b0, rs1}), "CSR source or zimm");
      // illegal encodings
      instr = {25'($urandom), badop[$urandom_range(4)]};
      expect_illegal("A/F opcode is illegal");
      instr = {17'($urandom), 3'($urandom_range(3, 2)), 5'($urandom), 7'h63};
      expect_illegal("branch funct3 2/3 is illegal");
      instr = {17'($urandom), 3'd7, 5'($urandom), 7'h03};
      expect_illegal("load funct3 7 is illegal");
      instr = {17'($urandom), 3'($urandom_range(7, 4)), 5'($urandom), 7'h23};
      expect_illegal("store funct3 4..7 is illegal");
      instr = {7'h01, 10'($urandom), 3'($urandom_range(3, 1)), 5'($urandom), 7'h3b};
      expect_illegal("MULH*W does not exist");
      instr = {7'h00, 10'($urandom), 3'($urandom_range(4, 2)), 5'($urandom), 7'h3b};
      expect_illegal("SLT/SLTU/XOR W forms do not exist");
      instr = {7'h40, 10'($urandom), 3'd0, 5'($urandom), 7'h33};
      expect_illegal("reserved funct7");
      instr = {7'h00, 5'($urandom), 5'($urandom), 3'($urandom_range(7, 1)), 5'($urandom), 7'h67};
      if (instr[14:12] != 3'd0) expect_illegal("jalr with funct3 != 0");
      // privileged instructions
      priv = pl[$urandom_range(2)];
      dbg = 1'($urandom); tvm = 1'($urandom); tw = 1'($urandom); tsr = 1'($urandom);
      instr = 32'h3020_0073;
      expect_legal_priv(priv == PRIV_M, MRET, "mret only in M mode");
      instr = 32'h1020_0073;
      expect_legal_priv(priv == PRIV_M || (priv == PRIV_S && !tsr), SRET, "sret: S/M mode, TSR");
      instr = 32'h1050_0073;
      expect_legal_priv(priv == PRIV_M || !tw, WFI, "wfi: TW below M mode");
      instr = {7'b0001001, 5'($urandom), 5'($urandom), 3'b000, 5'b0, 7'h73};
      expect_legal_priv(priv == PRIV_M || (priv == PRIV_S && !tvm), SFENCE_VMA, "sfence.vma: TVM");
      instr = 32'h7b20_0073;
      expect_legal_priv(dbg, DRET, "dret only in debug mode");
      instr = 32'h0000_0073;
      #1;
      check(out.ex.valid && out.ex.cause == (priv == PRIV_M ? ENV_CALL_MMODE :
            priv == PRIV_S ? ENV_CALL_SMODE : ENV_CALL_UMODE), "ecall cause by privilege");
      instr = 32'h0010_0073;
      #1;
      check(out.ex.valid && out.ex.cause == BREAKPOINT && out.ex.tval == pc, "ebreak");
      instr = 32'h0000_100f;
      #1;
      check(!out.ex.valid && out.fu == FU_CSR && out.op == FENCE_I, "fence.i");
      // fetch exception passes through
      fex.valid = 1'b1; fex.cause = INSTR_PAGE_FAULT; fex.tval = {$urandom, $urandom};
      instr = $urandom;
      #1;
      check(out.ex == fex, "fetch exception passes through");
      fex = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
