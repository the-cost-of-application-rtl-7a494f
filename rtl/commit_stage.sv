// Commit stage: retires finished instructions from the scoreboard head in
// program order, up to two per cycle, and is the only place where
// architectural state outside the register file changes.
// Port 0 (the oldest instruction) handles every case:
//  - a pending interrupt (irq_i) or debug request is taken on it instead of
//    retiring it, unless it is a CSR/system instruction (those must finish
//    so that the interrupt state they write is seen first);
//  - an exception recorded with it raises a trap (ex_o); ebreak with the
//    matching dcsr.ebreakX bit enters debug mode instead;
//  - a store retires once the store buffer can take the commit;
//  - a CSR instruction performs its access now; its old value goes to rd
//    and the pipeline is refetched from the next instruction (set_pc_o),
//    an illegal access raises illegal-instruction instead;
//  - mret/sret/dret return (eret_o), fence waits for an empty store buffer,
//    fence.i additionally requests the data-cache write-back and waits for
//    fence_i_done_i, sfence.vma flushes the TLBs, wfi waits for a wake-up.
//    All of these refetch afterwards.
// Port 1 retires in the same cycle only when port 0 retired without any side
// effect and the second instruction is a plain ALU/branch/multiply/load
// result without exception.
module commit_stage import ariane_pkg::*; (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 halt_i,
  input  sb_entry_t [1:0]      commit_instr_i,
  input  logic [1:0]           commit_valid_i,
  output logic [1:0]           commit_ack_o,
  output logic [1:0][4:0]      waddr_o,
  output logic [1:0][63:0]     wdata_o,
  output logic [1:0]           we_o,
  // interrupts and debug
  input  exception_t           irq_i,
  input  logic                 debug_req_i,
  input  logic                 debug_mode_i,
  input  logic                 ebreak_to_debug_i,
  input  logic                 wfi_wakeup_i,
  // store buffer
  output logic                 st_commit_o,
  input  logic                 st_commit_ready_i,
  input  logic                 sb_empty_i,
  // CSR file
  output logic                 csr_commit_o,
  output logic                 csr_valid_o,
  output fu_op_t               csr_op_o,
  input  logic [63:0]          csr_rdata_i,
  input  logic                 csr_illegal_i,
  // traps and redirects
  output exception_t           ex_o,
  output logic [63:0]          ex_pc_o,
  output logic                 debug_enter_o,
  output logic                 mret_o,
  output logic                 sret_o,
  output logic                 dret_o,
  output logic                 set_pc_o,
  output logic [63:0]          set_pc_addr_o,
  output logic                 fence_i_req_o,
  input  logic                 fence_i_done_i,
  output logic                 flush_icache_o,
  output logic                 flush_tlb_o,
  // events
  output logic [1:0]           instret_o,
  output logic                 commit_load_o,
  output logic                 commit_store_o
);
  sb_entry_t i0, i1;
  logic      head_ok, plain0, plain1;
  assign i0 = commit_instr_i[0];
  assign i1 = commit_instr_i[1];
  assign head_ok = commit_valid_i[0] && i0.valid && !halt_i;
  assign plain0  = i0.fu inside {FU_ALU, FU_CTRL, FU_MULT, FU_LOAD, FU_NONE};
  assign plain1  = i1.fu inside {FU_ALU, FU_CTRL, FU_MULT, FU_LOAD, FU_NONE};
  assign set_pc_addr_o = i0.pc + (i0.is_compressed ? 64'd2 : 64'd4);
  assign csr_op_o = i0.op;

  always_comb begin
    commit_ack_o = '0; we_o = '0;
    waddr_o[0] = i0.rd[4:0]; waddr_o[1] = i1.rd[4:0];
    wdata_o[0] = i0.result;  wdata_o[1] = i1.result;
    st_commit_o = 1'b0; csr_commit_o = 1'b0; csr_valid_o = 1'b0;
    ex_o = '0; ex_pc_o = i0.pc; debug_enter_o = 1'b0;
    mret_o = 1'b0; sret_o = 1'b0; dret_o = 1'b0; set_pc_o = 1'b0;
    fence_i_req_o = 1'b0; flush_icache_o = 1'b0; flush_tlb_o = 1'b0;
    if (head_ok) begin
      if (debug_req_i && !debug_mode_i && i0.fu != FU_CSR) begin
        debug_enter_o = 1'b1;
      end else if (irq_i.valid && i0.fu != FU_CSR) begin
        ex_o = irq_i;
      end else if (i0.ex.valid) begin
        if (i0.op == EBREAK && i0.ex.cause == BREAKPOINT && ebreak_to_debug_i) debug_enter_o = 1'b1;
        else ex_o = i0.ex;
        // the trap consumes the instruction without retiring it
        commit_ack_o[0] = 1'b1;
      end else begin
        unique case (i0.fu)
          FU_STORE: if (st_commit_ready_i) begin
            commit_ack_o[0] = 1'b1; st_commit_o = 1'b1;
          end
          FU_CSR: begin
            unique case (i0.op)
              CSR_WRITE, CSR_SET, CSR_CLEAR, CSR_READ: begin
                csr_valid_o = 1'b1;
                commit_ack_o[0] = 1'b1; csr_commit_o = 1'b1;
                if (csr_illegal_i) begin
                  ex_o = '{cause: ILLEGAL_INSTR, tval: '0, valid: 1'b1};
                end else begin
                  we_o[0] = 1'b1; wdata_o[0] = csr_rdata_i; set_pc_o = 1'b1;
                end
              end
              MRET: begin commit_ack_o[0] = 1'b1; csr_commit_o = 1'b1; mret_o = 1'b1; end
              SRET: begin commit_ack_o[0] = 1'b1; csr_commit_o = 1'b1; sret_o = 1'b1; end
              DRET: begin commit_ack_o[0] = 1'b1; csr_commit_o = 1'b1; dret_o = 1'b1; end
              FENCE: if (sb_empty_i) begin
                commit_ack_o[0] = 1'b1; csr_commit_o = 1'b1; set_pc_o = 1'b1;
              end
              FENCE_I: if (sb_empty_i) begin
                fence_i_req_o = 1'b1;
                if (fence_i_done_i) begin
                  commit_ack_o[0] = 1'b1; csr_commit_o = 1'b1; set_pc_o = 1'b1; flush_icache_o = 1'b1;
                end
              end
              SFENCE_VMA: if (sb_empty_i) begin
                commit_ack_o[0] = 1'b1; csr_commit_o = 1'b1; set_pc_o = 1'b1; flush_tlb_o = 1'b1;
              end
              WFI: if (wfi_wakeup_i) begin
                commit_ack_o[0] = 1'b1; csr_commit_o = 1'b1; set_pc_o = 1'b1;
              end
              default: begin commit_ack_o[0] = 1'b1; csr_commit_o = 1'b1; set_pc_o = 1'b1; end
            endcase
          end
          default: begin
            commit_ack_o[0] = 1'b1;
            we_o[0] = i0.rd[4:0] != 5'd0;
          end
        endcase
        // second port
        if (commit_ack_o[0] && (plain0 || i0.fu == FU_STORE) && commit_valid_i[1] && i1.valid &&
            !i1.ex.valid && plain1 && !irq_i.valid && !debug_req_i) begin
          commit_ack_o[1] = 1'b1;
          we_o[1] = i1.rd[4:0] != 5'd0;
        end
      end
    end
  end

  assign instret_o = {1'b0, commit_ack_o[0] && !ex_o.valid && !debug_enter_o} + {1'b0, commit_ack_o[1]};
  assign commit_load_o  = (commit_ack_o[0] && !ex_o.valid && i0.fu == FU_LOAD) ||
                          (commit_ack_o[1] && i1.fu == FU_LOAD);
  assign commit_store_o = st_commit_o;

  // A flush follows every trap or redirect, so the head is never seen twice.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   commit_ack_o[1] |-> commit_ack_o[0]);
endmodule
