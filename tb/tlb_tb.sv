// Testbench of the TLB (16 entries). Fills it with 4 KiB pages and checks
// that all of them hit with the right PTE and level and that other pages
// miss; checks 2 MiB and 1 GiB pages match any address inside them; then,
// over 500 rounds, touches a random entry and inserts a new page into the
// full TLB: the new page must hit, exactly one old page must be lost and it
// must not be the one just used (pseudo-LRU). A flush must empty the TLB.
// Lookups are combinational (same cycle).
module tlb_tb;
  import ariane_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, flush = 0, upd_v = 0, lookup = 0, hit;
  tlb_update_t upd;
  logic [38:0] vaddr;
  logic [1:0] level;
  pte_t pte;
  int checks = 0, failures = 0;

  tlb #(.NR_ENTRIES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .flush_i(flush), .update_i(upd),
       .update_valid_i(upd_v), .lookup_i(lookup), .vaddr_i(vaddr), .hit_o(hit), .level_o(level), .pte_o(pte));
  always #5 clk = ~clk;

  function automatic pte_t mk(input logic [26:0] vpn);
    pte_t p; p = '0; p.ppn = {17'b0, vpn}; p.v = 1; p.r = 1; p.a = 1; return p;
  endfunction

  task automatic ins(input logic [26:0] vpn, input logic [1:0] lvl);
    @(negedge clk); upd = '{vpn: vpn, level: lvl, pte: mk(vpn)}; upd_v = 1;
    @(negedge clk); upd_v = 0;
  endtask

  task automatic probe(input logic [38:0] va, output bit h);
    @(negedge clk); vaddr = va; lookup = 1; #1; h = hit;
    @(negedge clk); lookup = 0;
  endtask

  task automatic expect_hit(input logic [38:0] va, input bit e, input logic [26:0] vpn, input logic [1:0] lvl);
    bit h;
    probe(va, h);
    checks++;
    if (h !== e) begin failures++; if (failures < 10) $display("FAIL va=%h hit=%b exp %b", va, h, e); end
    else if (e) begin
      vaddr = va; #1;
      checks++;
      if (pte.ppn[26:0] !== vpn || level !== lvl) begin failures++; $display("FAIL va=%h pte/level wrong", va); end
    end
  endtask

  logic [26:0] live [$];
  initial begin
    upd = '0; vaddr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin ins(27'(100 + i), 2'd0); live.push_back(27'(100 + i)); end
    for (int i = 0; i < N; i++) expect_hit({27'(100 + i), 12'($urandom)}, 1, 27'(100 + i), 0);
    expect_hit({27'd99, 12'h0}, 0, '0, 0);
    // superpages
    @(negedge clk) flush = 1; @(negedge clk) flush = 0;
    expect_hit({27'd100, 12'h0}, 0, '0, 0);
    ins({9'd3, 9'd5, 9'd0}, 2'd1);
    ins({9'd7, 9'd0, 9'd0}, 2'd2);
    expect_hit({9'd3, 9'd5, 9'd77, 12'h123}, 1, {9'd3, 9'd5, 9'd0}, 1);
    expect_hit({9'd3, 9'd6, 9'd77, 12'h123}, 0, '0, 0);
    expect_hit({9'd7, 9'd300, 9'd1, 12'h0}, 1, {9'd7, 9'd0, 9'd0}, 2);
    // replacement
    @(negedge clk) flush = 1; @(negedge clk) flush = 0;
    live.delete();
    for (int i = 0; i < N; i++) begin ins(27'(1000 + i), 2'd0); live.push_back(27'(1000 + i)); end
    for (int r = 0; r < 500; r++) begin
      int used, lost; bit h; logic [26:0] nv;
      used = $urandom_range(N - 1);
      probe({live[used], 12'h0}, h);
      nv = 27'(5000 + r);
      ins(nv, 2'd0);
      lost = -1;
      for (int i = 0; i < N; i++) begin
        probe({live[i], 12'h0}, h);
        if (!h) begin
          checks++;
          if (lost != -1 || i == used) begin failures++; $display("FAIL: round %0d lost entry %0d (used %0d)", r, i, used); end
          lost = i;
        end
      end
      checks++;
      if (lost == -1) begin failures++; $display("FAIL: round %0d nothing replaced", r); end
      else live[lost] = nv;
      expect_hit({nv, 12'h0}, 1, nv, 0);
    end
    @(negedge clk) flush = 1; @(negedge clk) flush = 0;
    for (int i = 0; i < N; i++) expect_hit({live[i], 12'h0}, 0, '0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10_000_000; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
