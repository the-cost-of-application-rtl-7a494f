// Top level of the application-class core: a six-stage, single-issue,
// in-order RV64IMC pipeline with M, S and U privilege modes and SV39
// virtual memory.
//   PC generation / IF : frontend (BHT, BTB, RAS, I$ 16 KiB 4-way, fetch queue)
//   ID                 : id_stage (re-aligner, RVC expander, decoder)
//   Issue              : issue_stage (scoreboard of 8 entries, renaming,
//                        31x64 flip-flop register file, operand forwarding)
//   EX                 : ex_stage (ALU, branch unit, multiplier/divider,
//                        CSR buffer, load/store unit, store buffer)
//   Commit             : commit_stage + csr_regfile + controller
// Shared by several stages: the MMU (ITLB/DTLB with 16 entries each and the
// page-table walker), the write-back data cache (32 KiB, 8-way, 3-cycle
// load latency, ports: walker, loads, stores) and an arbiter that places the
// instruction and data caches on one 64-bit AXI master port.
// Interface: clock and active-low asynchronous reset, machine/supervisor
// external interrupts irq_i[1:0] (bit 0 machine), software interrupt ipi_i,
// timer interrupt time_irq_i, debug halt request debug_req_i and the AXI
// request/response structs. The boot address and the debug module base are
// parameters.
// From the paper: the stage split, Table II sizes, the three cache ports, the
// single AXI port and the four interrupt sources. Own choices: the three
// write-back buses, the uncached region below BOOT_ADDR and the debug ROM
// offsets of the RISC-V debug specification.
// Lint note: a SYNCASYNCNET warning names rst_ni because the concurrent
// assertions in the stages use it in "disable iff" while the flip-flops use
// it as an asynchronous reset; the assertions are simulation-only, so this
// has no effect on the circuit.
module ariane import ariane_pkg::*; #(
  parameter logic [63:0] BOOT_ADDR = 64'h8000_0000,
  parameter logic [63:0] HART_ID   = 64'd0,
  parameter logic [63:0] DM_BASE   = 64'h0000_0000
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic [1:0] irq_i,
  input  logic       ipi_i,
  input  logic       time_irq_i,
  input  logic       debug_req_i,
  output axi_req_t   axi_req_o,
  input  axi_rsp_t   axi_rsp_i
);
  localparam int unsigned NR_WB_PORTS = 3;

  // frontend <-> MMU / decode
  logic            fetch_req, fetch_valid, fetch_entry_valid, fetch_ack, icache_miss;
  logic [63:0]     fetch_vaddr;
  logic [PLEN-1:0] fetch_paddr;
  exception_t      fetch_ex;
  fetch_entry_t    fetch_entry;
  // decode -> issue
  sb_entry_t       decoded_instr;
  logic            decoded_valid, decoded_ack, is_ctrl_flow;
  // issue -> EX
  fu_data_t        fu_data;
  logic [63:0]     ex_pc;
  logic            ex_is_compressed;
  branchpredict_t  ex_bp;
  logic            alu_valid, branch_valid, lsu_valid, mult_valid, csr_valid;
  logic            lsu_ready, mult_ready, csr_ready, sb_full, sb_empty;
  wb_t [NR_WB_PORTS-1:0] wb;
  bp_resolve_t     resolved_branch;
  // commit
  sb_entry_t [1:0] commit_instr;
  logic [1:0]      commit_valid, commit_ack, rf_we;
  logic [1:0][4:0] rf_waddr;
  logic [1:0][63:0] rf_wdata;
  logic            st_commit, st_commit_ready, st_empty;
  logic            csr_commit, csr_access, csr_illegal;
  fu_op_t          csr_op;
  logic [11:0]     csr_addr;
  logic [63:0]     csr_wdata, csr_rdata;
  exception_t      commit_ex, irq;
  logic [63:0]     commit_ex_pc, trap_vector, epc, set_pc_addr;
  logic            debug_enter, mret, sret, dret, set_pc, fence_i_req, fence_i_done;
  logic            flush_icache, flush_tlb, flush_dcache, dcache_flush_ack;
  logic            flush_id, flush_ex;
  logic [1:0]      instret;
  logic            commit_load, commit_store;
  // CSR state
  priv_lvl_t       priv_lvl, ld_st_priv_lvl;
  logic            satp_sv39, sum, mxr, tvm, tw, tsr, debug_mode, ebreak_to_debug, wfi_wakeup;
  logic [43:0]     satp_ppn;
  // memory side
  logic            mmu_req, mmu_is_store, mmu_valid, itlb_miss, dtlb_miss, dcache_miss;
  logic [63:0]     mmu_vaddr;
  logic [PLEN-1:0] mmu_paddr;
  exception_t      mmu_ex;
  dcache_req_t [2:0] dc_req;
  dcache_rsp_t [2:0] dc_rsp;
  axi_req_t [1:0]  m_axi_req;
  axi_rsp_t [1:0]  m_axi_rsp;
  logic [NR_PERF_COUNTERS-1:0] perf_events;

  frontend #(.BOOT_ADDR(BOOT_ADDR)) i_frontend (
    .clk_i, .rst_ni, .flush_icache_i(flush_icache), .flush_bp_i(1'b0),
    .resolved_branch_i(resolved_branch), .set_pc_commit_i(set_pc), .pc_commit_i(set_pc_addr),
    .eret_i(mret || sret || dret), .epc_i(epc), .ex_valid_i(commit_ex.valid || debug_enter),
    .trap_vector_base_i(trap_vector),
    .fetch_req_o(fetch_req), .fetch_vaddr_o(fetch_vaddr), .fetch_valid_i(fetch_valid),
    .fetch_paddr_i(fetch_paddr), .fetch_ex_i(fetch_ex),
    .axi_req_o(m_axi_req[0]), .axi_rsp_i(m_axi_rsp[0]), .icache_miss_o(icache_miss),
    .fetch_entry_o(fetch_entry), .fetch_valid_o(fetch_entry_valid), .fetch_ack_i(fetch_ack));

  id_stage i_id_stage (
    .clk_i, .rst_ni, .flush_i(flush_id), .fetch_entry_i(fetch_entry), .fetch_valid_i(fetch_entry_valid),
    .fetch_ack_o(fetch_ack), .instr_o(decoded_instr), .valid_o(decoded_valid),
    .is_ctrl_flow_o(is_ctrl_flow), .ack_i(decoded_ack), .priv_lvl_i(priv_lvl),
    .debug_mode_i(debug_mode), .tvm_i(tvm), .tw_i(tw), .tsr_i(tsr));

  issue_stage #(.NR_WB_PORTS(NR_WB_PORTS)) i_issue_stage (
    .clk_i, .rst_ni, .flush_i(flush_ex), .sb_full_o(sb_full), .sb_empty_o(sb_empty),
    .decoded_instr_i(decoded_instr), .decoded_valid_i(decoded_valid), .is_ctrl_flow_i(is_ctrl_flow),
    .decoded_ack_o(decoded_ack), .lsu_ready_i(lsu_ready), .mult_ready_i(mult_ready),
    .csr_ready_i(csr_ready), .fu_data_o(fu_data), .pc_o(ex_pc), .is_compressed_o(ex_is_compressed),
    .bp_o(ex_bp), .alu_valid_o(alu_valid), .branch_valid_o(branch_valid), .lsu_valid_o(lsu_valid),
    .mult_valid_o(mult_valid), .csr_valid_o(csr_valid), .resolved_branch_i(resolved_branch),
    .wb_i(wb), .commit_instr_o(commit_instr), .commit_valid_o(commit_valid),
    .commit_ack_i(commit_ack), .waddr_i(rf_waddr), .wdata_i(rf_wdata), .we_i(rf_we));

  ex_stage #(.NR_WB_PORTS(NR_WB_PORTS)) i_ex_stage (
    .clk_i, .rst_ni, .flush_i(flush_ex), .fu_data_i(fu_data), .pc_i(ex_pc),
    .is_compressed_i(ex_is_compressed), .bp_i(ex_bp), .alu_valid_i(alu_valid),
    .branch_valid_i(branch_valid), .lsu_valid_i(lsu_valid), .mult_valid_i(mult_valid),
    .csr_valid_i(csr_valid), .lsu_ready_o(lsu_ready), .mult_ready_o(mult_ready),
    .csr_ready_o(csr_ready), .wb_o(wb), .resolved_branch_o(resolved_branch),
    .csr_commit_i(csr_commit), .csr_addr_o(csr_addr), .csr_wdata_o(csr_wdata),
    .st_commit_i(st_commit), .st_commit_ready_o(st_commit_ready), .sb_empty_o(st_empty),
    .mmu_req_o(mmu_req), .mmu_vaddr_o(mmu_vaddr), .mmu_is_store_o(mmu_is_store),
    .mmu_valid_i(mmu_valid), .mmu_paddr_i(mmu_paddr), .mmu_ex_i(mmu_ex),
    .ld_req_o(dc_req[1]), .ld_rsp_i(dc_rsp[1]), .st_req_o(dc_req[2]), .st_rsp_i(dc_rsp[2]));

  commit_stage i_commit_stage (
    .clk_i, .rst_ni, .halt_i(1'b0), .commit_instr_i(commit_instr), .commit_valid_i(commit_valid),
    .commit_ack_o(commit_ack), .waddr_o(rf_waddr), .wdata_o(rf_wdata), .we_o(rf_we),
    .irq_i(irq), .debug_req_i, .debug_mode_i(debug_mode), .ebreak_to_debug_i(ebreak_to_debug),
    .wfi_wakeup_i(wfi_wakeup), .st_commit_o(st_commit), .st_commit_ready_i(st_commit_ready),
    .sb_empty_i(st_empty), .csr_commit_o(csr_commit), .csr_valid_o(csr_access), .csr_op_o(csr_op),
    .csr_rdata_i(csr_rdata), .csr_illegal_i(csr_illegal), .ex_o(commit_ex), .ex_pc_o(commit_ex_pc),
    .debug_enter_o(debug_enter), .mret_o(mret), .sret_o(sret), .dret_o(dret),
    .set_pc_o(set_pc), .set_pc_addr_o(set_pc_addr), .fence_i_req_o(fence_i_req),
    .fence_i_done_i(fence_i_done), .flush_icache_o(flush_icache), .flush_tlb_o(flush_tlb),
    .instret_o(instret), .commit_load_o(commit_load), .commit_store_o(commit_store));

  assign perf_events = {resolved_branch.valid && resolved_branch.cf != Branch,
                        resolved_branch.valid && resolved_branch.is_mispredict,
                        resolved_branch.valid, commit_ex.valid, commit_store, commit_load,
                        dtlb_miss, itlb_miss, dcache_miss, icache_miss};

  csr_regfile #(.HART_ID(HART_ID), .DM_BASE(DM_BASE)) i_csr_regfile (
    .clk_i, .rst_ni, .csr_valid_i(csr_access), .csr_op_i(csr_op), .csr_addr_i(csr_addr),
    .csr_wdata_i(csr_wdata), .csr_rdata_o(csr_rdata), .csr_illegal_o(csr_illegal),
    .ex_i(commit_ex), .pc_i(commit_ex_pc), .debug_enter_i(debug_enter),
    .mret_i(mret), .sret_i(sret), .dret_i(dret), .trap_vector_base_o(trap_vector), .epc_o(epc),
    .irq_i, .ipi_i, .time_irq_i, .debug_req_i, .irq_o(irq), .wfi_wakeup_o(wfi_wakeup),
    .debug_mode_o(debug_mode), .ebreak_to_debug_o(ebreak_to_debug),
    .priv_lvl_o(priv_lvl), .ld_st_priv_lvl_o(ld_st_priv_lvl), .satp_sv39_o(satp_sv39),
    .satp_ppn_o(satp_ppn), .sum_o(sum), .mxr_o(mxr), .tvm_o(tvm), .tw_o(tw), .tsr_o(tsr),
    .instret_i(instret), .perf_events_i(perf_events));

  controller i_controller (
    .clk_i, .rst_ni, .resolved_branch_i(resolved_branch), .ex_valid_i(commit_ex.valid || debug_enter),
    .eret_i(mret || sret || dret), .set_pc_commit_i(set_pc), .fence_i_req_i(fence_i_req),
    .dcache_flush_ack_i(dcache_flush_ack), .flush_id_o(flush_id), .flush_ex_o(flush_ex),
    .flush_dcache_o(flush_dcache), .fence_i_done_o(fence_i_done));

  mmu i_mmu (
    .clk_i, .rst_ni, .flush_tlb_i(flush_tlb), .priv_lvl_i(priv_lvl), .ld_st_priv_lvl_i(ld_st_priv_lvl),
    .satp_mode_sv39_i(satp_sv39), .satp_ppn_i(satp_ppn), .sum_i(sum), .mxr_i(mxr),
    .fetch_req_i(fetch_req), .fetch_vaddr_i(fetch_vaddr), .fetch_valid_o(fetch_valid),
    .fetch_paddr_o(fetch_paddr), .fetch_ex_o(fetch_ex),
    .lsu_req_i(mmu_req), .lsu_vaddr_i(mmu_vaddr), .lsu_is_store_i(mmu_is_store),
    .lsu_valid_o(mmu_valid), .lsu_paddr_o(mmu_paddr), .lsu_ex_o(mmu_ex),
    .ptw_req_o(dc_req[0]), .ptw_rsp_i(dc_rsp[0]), .itlb_miss_o(itlb_miss), .dtlb_miss_o(dtlb_miss));

  dcache i_dcache (
    .clk_i, .rst_ni, .flush_i(flush_dcache), .flush_ack_o(dcache_flush_ack),
    .req_i(dc_req), .rsp_o(dc_rsp), .miss_o(dcache_miss),
    .axi_req_o(m_axi_req[1]), .axi_rsp_i(m_axi_rsp[1]));

  axi_arbiter i_axi_arbiter (.clk_i, .rst_ni, .m_req_i(m_axi_req), .m_rsp_o(m_axi_rsp),
                             .s_req_o(axi_req_o), .s_rsp_i(axi_rsp_i));
endmodule
