// Memory management unit: instruction TLB, data TLB and page table walker,
// plus the SV39 permission checks. Translation is active when satp.MODE is
// SV39 and the effective privilege level is below M (for data accesses the
// effective level is MPP when mstatus.MPRV is set). Without translation the
// physical address is the low 56 bits of the virtual one.
// Both sides answer in the cycle of the request when the TLB hits
// (valid_o with the physical address or a page-fault exception). On a miss
// valid_o stays low and the walker is started; the request is presented
// again until it hits. A walk that ends in a fault is remembered for the
// faulting page and reported as a page fault when that page is asked for
// next. Checks: canonical address (bits 63..39 equal bit 38), A bit set,
// X for fetches, R (or X with MXR) for loads, W and D for stores, U pages
// only from U mode (and from S mode for data if SUM), S mode never executes
// U pages. The TLBs are looked up on every access, translation on or off.
module mmu import ariane_pkg::*; #(
  parameter int unsigned NR_ITLB_ENTRIES = 16,
  parameter int unsigned NR_DTLB_ENTRIES = 16
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            flush_tlb_i,
  input  priv_lvl_t       priv_lvl_i,
  input  priv_lvl_t       ld_st_priv_lvl_i,
  input  logic            satp_mode_sv39_i,
  input  logic [43:0]     satp_ppn_i,
  input  logic            sum_i,
  input  logic            mxr_i,
  // instruction side
  input  logic            fetch_req_i,
  input  logic [63:0]     fetch_vaddr_i,
  output logic            fetch_valid_o,
  output logic [PLEN-1:0] fetch_paddr_o,
  output exception_t      fetch_ex_o,
  // data side
  input  logic            lsu_req_i,
  input  logic [63:0]     lsu_vaddr_i,
  input  logic            lsu_is_store_i,
  output logic            lsu_valid_o,
  output logic [PLEN-1:0] lsu_paddr_o,
  output exception_t      lsu_ex_o,
  // walker memory port and events
  output dcache_req_t     ptw_req_o,
  input  dcache_rsp_t     ptw_rsp_i,
  output logic            itlb_miss_o,
  output logic            dtlb_miss_o
);
  logic itlb_hit, dtlb_hit;
  logic [1:0] ilevel, dlevel;
  pte_t ipte, dpte;
  tlb_update_t upd;
  logic iupd, dupd, ptw_err, ptw_err_instr, ptw_busy;
  logic [38:0] ptw_err_vaddr;
  logic ifault_q, dfault_q;
  logic [26:0] ifault_vpn_q, dfault_vpn_q;
  logic i_en, d_en, i_canon, d_canon;

  assign i_en = satp_mode_sv39_i && priv_lvl_i != PRIV_M;
  assign d_en = satp_mode_sv39_i && ld_st_priv_lvl_i != PRIV_M;
  assign i_canon = fetch_vaddr_i[63:38] == '0 || fetch_vaddr_i[63:38] == '1;
  assign d_canon = lsu_vaddr_i[63:38] == '0 || lsu_vaddr_i[63:38] == '1;

  tlb #(.NR_ENTRIES(NR_ITLB_ENTRIES)) i_itlb (.clk_i, .rst_ni, .flush_i(flush_tlb_i),
    .update_i(upd), .update_valid_i(iupd), .lookup_i(fetch_req_i), .vaddr_i(fetch_vaddr_i[38:0]),
    .hit_o(itlb_hit), .level_o(ilevel), .pte_o(ipte));
  tlb #(.NR_ENTRIES(NR_DTLB_ENTRIES)) i_dtlb (.clk_i, .rst_ni, .flush_i(flush_tlb_i),
    .update_i(upd), .update_valid_i(dupd), .lookup_i(lsu_req_i), .vaddr_i(lsu_vaddr_i[38:0]),
    .hit_o(dtlb_hit), .level_o(dlevel), .pte_o(dpte));

  function automatic logic [PLEN-1:0] compose(input logic [63:0] va, input pte_t p, input logic [1:0] lvl);
    unique case (lvl)
      2'd2:    return {p.ppn[43:18], va[29:0]};
      2'd1:    return {p.ppn[43:9], va[20:0]};
      default: return {p.ppn, va[11:0]};
    endcase
  endfunction

  ptw i_ptw (.clk_i, .rst_ni, .flush_i(flush_tlb_i), .satp_ppn_i,
    .itlb_miss_i(itlb_miss_o), .itlb_vaddr_i(fetch_vaddr_i[38:0]),
    .dtlb_miss_i(dtlb_miss_o), .dtlb_vaddr_i(lsu_vaddr_i[38:0]),
    .update_o(upd), .itlb_update_o(iupd), .dtlb_update_o(dupd),
    .error_o(ptw_err), .error_is_instr_o(ptw_err_instr), .error_vaddr_o(ptw_err_vaddr),
    .busy_o(ptw_busy), .req_port_o(ptw_req_o), .req_port_i(ptw_rsp_i));

  logic ifault_hit, dfault_hit;
  assign ifault_hit = ifault_q && ifault_vpn_q == fetch_vaddr_i[38:12];
  assign dfault_hit = dfault_q && dfault_vpn_q == lsu_vaddr_i[38:12];

  // instruction side
  always_comb begin
    fetch_valid_o = 1'b0;
    fetch_paddr_o = fetch_vaddr_i[PLEN-1:0];
    fetch_ex_o    = '0;
    itlb_miss_o   = 1'b0;
    if (fetch_req_i) begin
      if (!i_en) begin
        fetch_valid_o = 1'b1;
      end else if (!i_canon || ifault_hit) begin
        fetch_valid_o = 1'b1;
        fetch_ex_o = '{cause: INSTR_PAGE_FAULT, tval: fetch_vaddr_i, valid: 1'b1};
      end else if (itlb_hit) begin
        fetch_valid_o = 1'b1;
        fetch_paddr_o = compose(fetch_vaddr_i, ipte, ilevel);
        if (!ipte.x || !ipte.a || (priv_lvl_i == PRIV_U && !ipte.u) ||
            (priv_lvl_i == PRIV_S && ipte.u))
          fetch_ex_o = '{cause: INSTR_PAGE_FAULT, tval: fetch_vaddr_i, valid: 1'b1};
      end else begin
        itlb_miss_o = !ptw_busy && !iupd && !ptw_err;
      end
    end
  end

  // data side
  always_comb begin
    lsu_valid_o = 1'b0;
    lsu_paddr_o = lsu_vaddr_i[PLEN-1:0];
    lsu_ex_o    = '0;
    dtlb_miss_o = 1'b0;
    if (lsu_req_i) begin
      if (!d_en) begin
        lsu_valid_o = 1'b1;
      end else if (!d_canon || dfault_hit) begin
        lsu_valid_o = 1'b1;
        lsu_ex_o = '{cause: lsu_is_store_i ? STORE_PAGE_FAULT : LOAD_PAGE_FAULT,
                     tval: lsu_vaddr_i, valid: 1'b1};
      end else if (dtlb_hit) begin
        lsu_valid_o = 1'b1;
        lsu_paddr_o = compose(lsu_vaddr_i, dpte, dlevel);
        if (!dpte.a ||
            (lsu_is_store_i ? (!dpte.w || !dpte.d) : !(dpte.r || (mxr_i && dpte.x))) ||
            (ld_st_priv_lvl_i == PRIV_U && !dpte.u) ||
            (ld_st_priv_lvl_i == PRIV_S && dpte.u && !sum_i))
          lsu_ex_o = '{cause: lsu_is_store_i ? STORE_PAGE_FAULT : LOAD_PAGE_FAULT,
                       tval: lsu_vaddr_i, valid: 1'b1};
      end else begin
        dtlb_miss_o = !ptw_busy && !dupd && !ptw_err;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ifault_q <= 1'b0; dfault_q <= 1'b0; ifault_vpn_q <= '0; dfault_vpn_q <= '0;
    end else if (flush_tlb_i) begin
      ifault_q <= 1'b0; dfault_q <= 1'b0;
    end else begin
      if (ptw_err && ptw_err_instr)  begin ifault_q <= 1'b1; ifault_vpn_q <= ptw_err_vaddr[38:12]; end
      else if (fetch_req_i && ifault_hit) ifault_q <= 1'b0;
      if (ptw_err && !ptw_err_instr) begin dfault_q <= 1'b1; dfault_vpn_q <= ptw_err_vaddr[38:12]; end
      else if (lsu_req_i && dfault_hit) dfault_q <= 1'b0;
    end
  end
endmodule
