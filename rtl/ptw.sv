// Hardware page table walker for SV39. On a DTLB or ITLB miss (the DTLB is
// served first if both miss) it reads page-table entries through its own
// read port of the data cache, starting at the root table given by satp.ppn
// and walking up to three levels. A valid entry with R or X set is a leaf: if
// it is a correctly aligned superpage or a 4 KiB page, it is written into
// the TLB that missed together with its level. An invalid entry, W without
// R, a misaligned superpage or a pointer at the last level ends the walk with
// a page fault reported on error_o (error_is_instr_o tells which side).
// Accessed/dirty bits are not set by hardware; the MMU raises a page fault
// when they are needed but clear, as the privileged specification allows.
// One walk at a time; a walk always completes, even if the access that
// started it has been squashed, and a flush only stops a walk before it
// issues its next read.
module ptw import ariane_pkg::*; (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        flush_i,
  input  logic [43:0] satp_ppn_i,
  input  logic        itlb_miss_i,
  input  logic [38:0] itlb_vaddr_i,
  input  logic        dtlb_miss_i,
  input  logic [38:0] dtlb_vaddr_i,
  output tlb_update_t update_o,
  output logic        itlb_update_o,
  output logic        dtlb_update_o,
  output logic        error_o,
  output logic        error_is_instr_o,
  output logic [38:0] error_vaddr_o,
  output logic        busy_o,
  output dcache_req_t req_port_o,
  input  dcache_rsp_t req_port_i
);
  typedef enum logic [1:0] { IDLE, REQ, WAIT } state_e;
  state_e      state_q;
  logic [1:0]  level_q;
  logic        is_instr_q;
  logic [38:0] vaddr_q;
  logic [PLEN-1:0] pte_addr_q;
  pte_t        pte;
  logic [8:0]  vpn_part;

  assign pte    = pte_t'(req_port_i.rdata);
  assign busy_o = state_q != IDLE;
  assign error_vaddr_o = vaddr_q;

  always_comb begin
    req_port_o = '0;
    req_port_o.req  = state_q == REQ;
    req_port_o.addr = pte_addr_q;
    req_port_o.be   = '1;
  end


  always_comb begin
    unique case (level_q)
      2'd2:    vpn_part = vaddr_q[29:21];
      default: vpn_part = vaddr_q[20:12];
    endcase
  end

  logic leaf, invalid, misaligned;
  assign leaf       = pte.r || pte.x;
  assign invalid    = !pte.v || (!pte.r && pte.w);
  assign misaligned = (level_q == 2'd2 && pte.ppn[17:0] != '0) ||
                      (level_q == 2'd1 && pte.ppn[8:0] != '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE; level_q <= '0; is_instr_q <= 1'b0; vaddr_q <= '0; pte_addr_q <= '0;
      itlb_update_o <= 1'b0; dtlb_update_o <= 1'b0; error_o <= 1'b0; error_is_instr_o <= 1'b0;
      update_o <= '0;
    end else begin
      itlb_update_o <= 1'b0; dtlb_update_o <= 1'b0; error_o <= 1'b0;
      unique case (state_q)
        IDLE: if (!flush_i && (dtlb_miss_i || itlb_miss_i)) begin
          is_instr_q <= !dtlb_miss_i;
          vaddr_q    <= dtlb_miss_i ? dtlb_vaddr_i : itlb_vaddr_i;
          level_q    <= 2'd2;
          pte_addr_q <= {satp_ppn_i, (dtlb_miss_i ? dtlb_vaddr_i[38:30] : itlb_vaddr_i[38:30]), 3'b000};
          state_q    <= REQ;
        end
        REQ: if (flush_i) state_q <= IDLE;
             else if (req_port_i.gnt) state_q <= WAIT;
        WAIT: if (req_port_i.rvalid) begin
          if (invalid || (leaf && misaligned) || (!leaf && level_q == 2'd0)) begin
            error_o <= 1'b1; error_is_instr_o <= is_instr_q;
            state_q <= IDLE;
          end else if (leaf) begin
            itlb_update_o <= is_instr_q; dtlb_update_o <= !is_instr_q;
            update_o <= '{vpn: vaddr_q[38:12], level: level_q, pte: pte};
            state_q <= IDLE;
          end else begin
            level_q    <= level_q - 2'd1;
            pte_addr_q <= {pte.ppn, vpn_part, 3'b000};
            state_q    <= REQ;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
