// Execute stage: the functional units behind the issue stage's dispatch
// register and their write-back ports into the scoreboard.
//  - write-back port 0: the single-cycle units. The ALU (1 cycle), the
//    branch unit (link address; resolves the branch in the same cycle) and
//    the CSR buffer share it - only one of them gets a valid per cycle
//    because issue is single.
//  - write-back port 1: multiplier (2 cycles) and serial divider.
//  - write-back port 2: load/store unit. Loads return after address
//    translation and the data-cache latency; stores write back as soon as
//    they are translated and sit in the speculative store-buffer queue.
// The store buffer is here; the MMU is shared with the frontend and sits
// in the top level, connected through the mmu_* ports.
module ex_stage import ariane_pkg::*; #(
  parameter int unsigned NR_WB_PORTS = 3
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  flush_i,
  input  fu_data_t              fu_data_i,
  input  logic [63:0]           pc_i,
  input  logic                  is_compressed_i,
  input  branchpredict_t        bp_i,
  input  logic                  alu_valid_i,
  input  logic                  branch_valid_i,
  input  logic                  lsu_valid_i,
  input  logic                  mult_valid_i,
  input  logic                  csr_valid_i,
  output logic                  lsu_ready_o,
  output logic                  mult_ready_o,
  output logic                  csr_ready_o,
  output wb_t [NR_WB_PORTS-1:0] wb_o,
  output bp_resolve_t           resolved_branch_o,
  // commit side
  input  logic                  csr_commit_i,
  output logic [11:0]           csr_addr_o,
  output logic [63:0]           csr_wdata_o,
  input  logic                  st_commit_i,
  output logic                  st_commit_ready_o,
  output logic                  sb_empty_o,
  // address translation
  output logic                  mmu_req_o,
  output logic [63:0]           mmu_vaddr_o,
  output logic                  mmu_is_store_o,
  input  logic                  mmu_valid_i,
  input  logic [PLEN-1:0]       mmu_paddr_i,
  input  exception_t            mmu_ex_i,
  // data cache ports
  output dcache_req_t           ld_req_o,
  input  dcache_rsp_t           ld_rsp_i,
  output dcache_req_t           st_req_o,
  input  dcache_rsp_t           st_rsp_i
);
  logic [63:0] alu_result, link;
  wb_t         csr_wb, mult_wb, lsu_wb;
  logic        sb_valid, sb_ready, sb_match;
  logic [PLEN-1:0] sb_paddr;
  logic [63:0] sb_data;
  logic [7:0]  sb_be;

  alu i_alu (.fu_data_i, .result_o(alu_result));

  branch_unit i_branch (.valid_i(branch_valid_i), .fu_data_i, .pc_i, .is_compressed_i, .bp_i,
                        .link_o(link), .resolved_branch_o);

  csr_buffer i_csr_buffer (.clk_i, .rst_ni, .flush_i, .valid_i(csr_valid_i), .fu_data_i,
                           .ready_o(csr_ready_o), .wb_o(csr_wb), .commit_i(csr_commit_i),
                           .csr_addr_o, .csr_wdata_o);

  mult i_mult (.clk_i, .rst_ni, .flush_i, .valid_i(mult_valid_i), .fu_data_i,
               .ready_o(mult_ready_o), .wb_o(mult_wb));

  lsu i_lsu (.clk_i, .rst_ni, .flush_i, .valid_i(lsu_valid_i), .fu_data_i,
             .ready_o(lsu_ready_o), .wb_o(lsu_wb),
             .mmu_req_o, .mmu_vaddr_o, .mmu_is_store_o, .mmu_valid_i, .mmu_paddr_i, .mmu_ex_i,
             .sb_valid_o(sb_valid), .sb_ready_i(sb_ready), .sb_paddr_o(sb_paddr),
             .sb_data_o(sb_data), .sb_be_o(sb_be), .sb_match_i(sb_match),
             .ld_req_o, .ld_rsp_i);

  store_buffer i_store_buffer (.clk_i, .rst_ni, .flush_i, .ready_o(sb_ready), .valid_i(sb_valid),
                               .paddr_i(sb_paddr), .data_i(sb_data), .be_i(sb_be),
                               .commit_i(st_commit_i), .commit_ready_o(st_commit_ready_o),
                               .check_paddr_i(mmu_paddr_i), .page_offset_match_o(sb_match),
                               .empty_o(sb_empty_o), .req_port_o(st_req_o), .req_port_i(st_rsp_i));

  always_comb begin
    wb_o = '0;
    // port 0: fixed single-cycle units
    wb_o[0].trans_id = fu_data_i.trans_id;
    if (alu_valid_i) begin
      wb_o[0].valid = 1'b1; wb_o[0].data = alu_result;
    end else if (branch_valid_i) begin
      wb_o[0].valid = 1'b1; wb_o[0].data = link;
    end else if (csr_wb.valid) begin
      wb_o[0] = csr_wb;
    end
    wb_o[1] = mult_wb;
    wb_o[2] = lsu_wb;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   $onehot0({alu_valid_i, branch_valid_i, csr_valid_i, lsu_valid_i, mult_valid_i}));
endmodule
