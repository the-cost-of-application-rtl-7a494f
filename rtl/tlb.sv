// Translation lookaside buffer, fully associative, built from flip-flops
// (one instance is the ITLB, one the DTLB). Each entry holds a virtual page
// number, the page size (4 KiB, 2 MiB or 1 GiB, i.e. the SV39 level the page
// table walk ended on) and the leaf page-table entry. A lookup compares all
// entries in parallel, combinationally, and on a hit marks the entry as
// recently used in a tree pseudo-LRU (NR_ENTRIES-1 bits). A refill from the
// page table walker goes to the first invalid entry, otherwise to the entry
// the pseudo-LRU tree points at. flush_i (sfence.vma) invalidates every entry
// in one cycle. No address-space identifiers are kept: every flush is total.
module tlb import ariane_pkg::*; #(
  parameter int unsigned NR_ENTRIES = 16
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        flush_i,
  input  tlb_update_t update_i,
  input  logic        update_valid_i,
  input  logic        lookup_i,
  input  logic [38:0] vaddr_i,
  output logic        hit_o,
  output logic [1:0]  level_o,
  output pte_t        pte_o
);
  localparam int unsigned LOG = $clog2(NR_ENTRIES);
  logic [NR_ENTRIES-1:0] valid_q;
  tlb_update_t           tag_q [NR_ENTRIES];
  logic [NR_ENTRIES-2:0] plru_q;
  logic [NR_ENTRIES-1:0] match;
  logic [LOG-1:0]        hit_idx, victim;
  logic [26:0]           vpn;

  assign vpn = vaddr_i[38:12];

  always_comb begin
    hit_idx = '0;
    for (int e = 0; e < NR_ENTRIES; e++) begin
      match[e] = valid_q[e] &&
                 tag_q[e].vpn[26:18] == vpn[26:18] &&
                 (tag_q[e].level == 2'd2 || tag_q[e].vpn[17:9] == vpn[17:9]) &&
                 (tag_q[e].level != 2'd0 || tag_q[e].vpn[8:0] == vpn[8:0]);
      if (match[e]) hit_idx = LOG'(e);
    end
    hit_o   = |match;
    level_o = tag_q[hit_idx].level;
    pte_o   = tag_q[hit_idx].pte;
  end

  // victim: an invalid entry, else follow the pseudo-LRU tree
  always_comb begin
    int node;
    logic found;
    node = 0; victim = '0; found = 1'b0;
    for (int l = 0; l < LOG; l++) begin
      victim = {victim[LOG-2:0], plru_q[node]};
      node   = 2 * node + 1 + int'(plru_q[node]);
    end
    for (int e = 0; e < NR_ENTRIES; e++)
      if (!valid_q[e] && !found) begin victim = LOG'(e); found = 1'b1; end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0; plru_q <= '0;
      for (int e = 0; e < NR_ENTRIES; e++) tag_q[e] <= '0;
    end else if (flush_i) begin
      valid_q <= '0;
    end else begin
      if (lookup_i && hit_o) begin
        // point every node on the path away from the used entry
        for (int l = 0; l < LOG; l++)
          plru_q[(1 << l) - 1 + (int'(hit_idx) >> (LOG - l))] <= !hit_idx[LOG-1-l];
      end
      if (update_valid_i) begin
        valid_q[victim] <= 1'b1;
        tag_q[victim]   <= update_i;
      end
    end
  end
endmodule
